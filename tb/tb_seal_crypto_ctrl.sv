// tb_seal_crypto_ctrl -- self-checking test of the SEAL crypto controller.
// Expected lines are worked out with the reference AES in aes_ref_pkg:
// an encrypted write-back must leave with counter+1 and data XOR pads of the
// new counter; a flagged DRAM read must come back decrypted with the counter
// it carried; unflagged lines must pass unchanged. Checks: single-line
// latencies (20 cycles through AES, 1 cycle bypass), a burst of mixed
// reads/writes under random back-pressure scored by address, the engine's
// line rate (one new line every 8 cycles), wr_pending and the line counters.
module tb_seal_crypto_ctrl;
  import seal_pkg::*;
  import aes_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic key_load = 0, key_ready;
  logic [127:0] key;
  logic wb_valid = 0, wb_ready, mw_valid, mw_ready = 1, mr_valid = 0, mr_ready, fill_valid, fill_ready = 1;
  logic [31:0] wb_addr = 0, mw_addr, mr_addr = 0, fill_addr;
  line_t wb_line = '0, mw_line, mr_line = '0, fill_line;
  logic wr_pending;
  logic [31:0] aes_lines, bypass_lines;

  seal_crypto_ctrl dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic line_t ctr_xor(input line_t l, input logic [31:0] a, input logic [55:0] c);
    line_t o; logic [127:0] pad;
    o = l;
    for (int k = 0; k < 8; k++) begin
      pad = encrypt(key, {8'h00, c, 64'(a >> 4) + 64'(k)});
      o.data[2*k +: 2] = l.data[2*k +: 2] ^ pad;
    end
    return o;
  endfunction

  function automatic line_t rand_line(input bit enc);
    line_t l;
    for (int j = 0; j < 16; j++) l.data[j] = {$urandom, $urandom};
    l.ca = '{rsvd: '0, enc: enc, ctr: {24'($urandom), $urandom}};
    return l;
  endfunction

  // scoreboards keyed by address
  line_t  exp_mw [logic [31:0]];
  line_t  exp_fill [logic [31:0]];
  longint t_mw [logic [31:0]];
  longint t_fill [logic [31:0]];
  longint acc_mw [logic [31:0]];
  longint acc_fill [logic [31:0]];
  int n_mw = 0, n_fill = 0;

  always @(posedge clk) if (rst_n) begin
    if (wb_valid && wb_ready) acc_mw[wb_addr] = cyc;
    if (mr_valid && mr_ready) acc_fill[mr_addr] = cyc;
    if (mw_valid && mw_ready) begin
      checks++; n_mw++;
      if (!exp_mw.exists(mw_addr) || exp_mw[mw_addr] !== mw_line) begin
        failures++; $display("FAIL mw line at %h", mw_addr);
      end
      t_mw[mw_addr] = cyc - acc_mw[mw_addr];
      exp_mw.delete(mw_addr);
    end
    if (fill_valid && fill_ready) begin
      checks++; n_fill++;
      if (!exp_fill.exists(fill_addr) || exp_fill[fill_addr] !== fill_line) begin
        failures++; $display("FAIL fill line at %h", fill_addr);
      end
      t_fill[fill_addr] = cyc - acc_fill[fill_addr];
      exp_fill.delete(fill_addr);
    end
  end

  task automatic send_wb(input logic [31:0] a, input line_t l);
    line_t e;
    e = l;
    if (l.ca.enc) begin
      e.ca.ctr = l.ca.ctr + 1;
      e = ctr_xor(e, a, e.ca.ctr);
    end
    exp_mw[a] = e;
    wb_valid = 1; wb_addr = a; wb_line = l;
    do @(posedge clk); while (!wb_ready);
    #1 wb_valid = 0;
  endtask

  task automatic send_mr(input logic [31:0] a, input line_t plain);
    // DRAM holds ciphertext of 'plain' under plain.ca
    line_t c;
    c = plain.ca.enc ? ctr_xor(plain, a, plain.ca.ctr) : plain;
    exp_fill[a] = plain;
    mr_valid = 1; mr_addr = a; mr_line = c;
    do @(posedge clk); while (!mr_ready);
    #1 mr_valid = 0;
  endtask

  initial begin
    line_t l;
    longint t0;
    key = {$urandom, $urandom, $urandom, $urandom};
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); key_load = 1; @(negedge clk); key_load = 0;
    wait (key_ready); @(negedge clk);

    // 1. one encrypted write-back, latency 20
    send_wb(32'h0000_1000, rand_line(1));
    checks++;
    if (!wr_pending) begin failures++; $display("FAIL wr_pending low"); end
    wait (n_mw == 1); @(negedge clk);
    checks++;
    if (t_mw[32'h1000] != 20) begin failures++; $display("FAIL AES write latency %0d", t_mw[32'h1000]); end
    checks++;
    if (wr_pending) begin failures++; $display("FAIL wr_pending high"); end
    // 2. bypass write-back, latency 1
    send_wb(32'h0000_2000, rand_line(0));
    wait (n_mw == 2); @(negedge clk);
    checks++;
    if (t_mw[32'h2000] != 1) begin failures++; $display("FAIL bypass latency %0d", t_mw[32'h2000]); end
    // 3. encrypted read, latency 20; bypass read, latency 1
    send_mr(32'h0000_3080, rand_line(1));
    wait (n_fill == 1); @(negedge clk);
    checks++;
    if (t_fill[32'h3080] != 20) begin failures++; $display("FAIL AES read latency %0d", t_fill[32'h3080]); end
    send_mr(32'h0000_4000, rand_line(0));
    wait (n_fill == 2); @(negedge clk);
    checks++;
    if (t_fill[32'h4000] != 1) begin failures++; $display("FAIL bypass read latency %0d", t_fill[32'h4000]); end

    // 4. line rate: 6 encrypted writes back to back, no back-pressure
    t0 = cyc;
    for (int i = 0; i < 6; i++) send_wb(32'h0001_0000 + 32'(i * 128), rand_line(1));
    wait (n_mw == 8); @(negedge clk);
    checks++;
    if (cyc - t0 > 20 + 8 * 5 + 3) begin failures++; $display("FAIL line rate: %0d cycles for 6 lines", cyc - t0); end

    // 5. mixed burst with random back-pressure
    fork
      for (int i = 0; i < 24; i++) begin
        send_wb(32'h0010_0000 + 32'(i * 128), rand_line($urandom_range(0, 1) == 1));
        repeat ($urandom_range(0, 3)) @(negedge clk);
      end
      for (int i = 0; i < 24; i++) begin
        send_mr(32'h0020_0000 + 32'(i * 128), rand_line($urandom_range(0, 1) == 1));
        repeat ($urandom_range(0, 3)) @(negedge clk);
      end
      for (int i = 0; i < 600; i++) begin
        @(negedge clk);
        mw_ready   = ($urandom_range(0, 3) != 0);
        fill_ready = ($urandom_range(0, 3) != 0);
      end
    join
    mw_ready = 1; fill_ready = 1;
    repeat (60) @(negedge clk);
    checks++;
    if (n_mw != 32 || n_fill != 26 || exp_mw.size() != 0 || exp_fill.size() != 0) begin
      failures++; $display("FAIL counts mw=%0d fill=%0d", n_mw, n_fill);
    end
    checks++;
    if (aes_lines + bypass_lines != 58) begin
      failures++; $display("FAIL line counters %0d + %0d", aes_lines, bypass_lines);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
