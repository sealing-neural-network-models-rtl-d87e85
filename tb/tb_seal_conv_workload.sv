// tb_seal_conv_workload -- the kernel matrices of the four VGG-16 convolution
// layer sizes (64, 128, 256 and 512 input and output channels, 3x3 kernels,
// 4-byte weights) streamed from DRAM through one crypto controller, at
// encryption ratios from 100% down to 0% in steps of 10%, the sweep over
// which the scheme's encryption ratio is studied.
// Kernel row x (one input channel) holds NCHAN kernels of 9 weights,
// NCHAN*36 bytes or NCHAN*36/128 lines. For ratio R the first R% of rows, taken in
// a random order, are emalloc lines (encrypted with counter 1); the others are
// malloc lines. The ciphertext in DRAM is random data; for every 64th
// encrypted line the testbench computes the pads with the reference AES and
// checks the decrypted line; every bypassed line must come out unchanged.
// It also checks the cycle count of each run against the engine's rate: at
// most 8 cycles per encrypted line plus 1 per bypassed line, plus the pipeline
// fill, and at least 8 per encrypted line. It prints the bytes per cycle
// reached, which shows how much of the bus rate smart encryption recovers.
module tb_seal_conv_workload;
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

  // lines in flight, in the order they were sent (AES lines stay in order
  // among themselves, bypassed lines may overtake them)
  line_t  sent [logic [31:0]];
  bit     samp [logic [31:0]];
  int     n_out = 0;

  always @(posedge clk) if (rst_n && fill_valid && fill_ready) begin
    line_t c;
    n_out++;
    if (!sent.exists(fill_addr)) begin
      checks++; failures++; $display("FAIL unknown fill %h", fill_addr);
    end else begin
      c = sent[fill_addr];
      if (!c.ca.enc) begin
        checks++;
        if (fill_line !== c) begin failures++; $display("FAIL bypass line %h", fill_addr); end
      end else if (samp.exists(fill_addr)) begin
        line_t e;
        e = c;
        for (int k = 0; k < 8; k++)
          e.data[2*k +: 2] = c.data[2*k +: 2] ^ encrypt(key, {8'h00, c.ca.ctr, 64'(fill_addr >> 4) + 64'(k)});
        checks++;
        if (fill_line !== e) begin failures++; $display("FAIL decrypted line %h", fill_addr); end
        samp.delete(fill_addr);
      end
      sent.delete(fill_addr);
    end
  end

  task automatic run_layer(input int nchan, input int ratio);
    int lines_per_row, n_enc, n_byp, n_total, n_sel;
    int order [];
    bit enc_row [];
    longint t0, t, t_min, t_max;
    int a0, b0;
    lines_per_row = nchan * 9 * 4 / 128;
    n_sel = nchan * ratio / 100;
    order = new[nchan]; enc_row = new[nchan];
    for (int i = 0; i < nchan; i++) order[i] = i;
    order.shuffle();
    for (int i = 0; i < nchan; i++) enc_row[order[i]] = (i < n_sel);
    n_enc = n_sel * lines_per_row;
    n_total = nchan * lines_per_row;
    n_byp = n_total - n_enc;
    a0 = aes_lines; b0 = bypass_lines; n_out = 0;
    t0 = cyc;
    for (int x = 0; x < nchan; x++)
      for (int l = 0; l < lines_per_row; l++) begin
        line_t c;
        logic [31:0] a;
        a = 32'h0100_0000 + 32'((x * lines_per_row + l) * 128);
        for (int j = 0; j < 16; j++) c.data[j] = {$urandom, $urandom};
        c.ca = '{rsvd: '0, enc: enc_row[x], ctr: 56'd1};
        sent[a] = c;
        if (enc_row[x] && ((x * lines_per_row + l) % 64 == 0)) samp[a] = 1;
        @(negedge clk);
        mr_valid = 1; mr_addr = a; mr_line = c;
        do @(posedge clk); while (!mr_ready);
        #1 mr_valid = 0;
      end
    while (n_out < n_total) @(posedge clk);
    t = cyc - t0;
    $display("layer %0d channels, ratio %0d%%: %0d lines (%0d encrypted) in %0d cycles, %0d.%02d bytes/cycle",
             nchan, ratio, n_total, n_enc, t, (128 * n_total) / t, ((12800 * n_total) / t) % 100);
    checks++;
    if (int'(aes_lines) - a0 != n_enc || int'(bypass_lines) - b0 != n_byp) begin
      failures++; $display("FAIL line counts");
    end
    checks++;
    t_min = 8 * longint'(n_enc);
    t_max = t_min + longint'(n_byp) + 40;
    if (t < t_min || t > t_max) begin
      failures++; $display("FAIL cycles %0d outside [%0d, %0d]", t, t_min, t_max);
    end
    checks++;
    if (sent.size() != 0 || samp.size() != 0) begin failures++; $display("FAIL lines left"); end
  endtask

  initial begin
    key = {$urandom, $urandom, $urandom, $urandom};
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); key_load = 1; @(negedge clk); key_load = 0;
    wait (key_ready);
    for (int li = 0; li < 4; li++)
      for (int r = 100; r >= 0; r -= 10)
        run_layer(64 << li, r);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (12000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
