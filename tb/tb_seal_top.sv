// tb_seal_top -- end-to-end test of the SEAL memory side at its full size
// (six channels, 128 KB 8-way L2 slice each, default parameters), with one
// DRAM rank model per channel. The testbench plays the part of the compiler
// and of the cores for one small convolution layer:
//  1. smart encryption: it draws an 8x8 kernel matrix of 3x3 kernels, ranks
//     the 8 kernel rows by the sum of absolute weights, and marks the top 50%
//     of rows, and the input-feature-map channels that go with them, as
//     emalloc() memory (OP_ATTR enc=1); everything else stays malloc();
//  2. it writes weights and input maps through the core ports, then evicts
//     them by reading lines that conflict in the same L2 sets;
//  3. it snoops the DRAM chips: emalloc lines must hold exactly the
//     counter-mode ciphertext under counter 1 (computed with the reference
//     AES) and the flag, malloc lines the plaintext and a clear flag;
//  4. it reads everything back (misses, decryption) and compares;
//  5. it rewrites one word per line and evicts again: emalloc lines must now
//     use counter 2 and a fresh pad (unchanged blocks change ciphertext).
// Each mechanism (AES write, AES read, bypass write, bypass read, hit, miss,
// dirty write-back, DRAM back-pressure, counter re-use avoided) is counted and
// a mechanism that never happened counts as a failure. A hit must answer in
// 10 cycles.
module tb_seal_top;
  import seal_pkg::*;
  import aes_ref_pkg::*;

  localparam int NCH = 6, SETS = 128, NX = 8, NY = 8, K = 9;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic key_load = 0, key_ready;
  logic [127:0] key;
  logic [NCH-1:0] core_req_valid = '0, core_req_ready, core_req_enc = '0, core_rsp_valid;
  op_e core_req_op [NCH];
  logic [NCH-1:0][31:0] core_req_addr = '0, core_req_wdata = '0, core_rsp_rdata;
  logic [NCH-1:0] dram_rd_valid, dram_rd_ready, dram_rsp_valid, dram_rsp_ready, dram_wr_valid, dram_wr_ready;
  logic [NCH-1:0][31:0] dram_rd_addr, dram_rsp_addr, dram_wr_addr;
  logic [NCH-1:0][16:0][63:0] dram_rsp_chips, dram_wr_chips;
  logic [NCH-1:0][31:0] stat_aes_lines, stat_bypass_lines, stat_hits, stat_misses, stat_writebacks;

  seal_top dut (.*);

  for (genvar c = 0; c < NCH; c++) begin : g_dram
    dram_dimm_model u_dram (
      .clk, .rst_n,
      .rd_valid(dram_rd_valid[c]), .rd_ready(dram_rd_ready[c]), .rd_addr(dram_rd_addr[c]),
      .rsp_valid(dram_rsp_valid[c]), .rsp_ready(dram_rsp_ready[c]), .rsp_addr(dram_rsp_addr[c]),
      .rsp_chips(dram_rsp_chips[c]),
      .wr_valid(dram_wr_valid[c]), .wr_ready(dram_wr_ready[c]), .wr_addr(dram_wr_addr[c]),
      .wr_chips(dram_wr_chips[c])
    );
  end

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- mechanism counters (bus snooping) ----------------
  int n_enc_wr = 0, n_byp_wr = 0, n_dec_rd = 0, n_byp_rd = 0, n_stall = 0, n_ctr2 = 0, n_fresh_pad = 0;
  always @(posedge clk) if (rst_n) for (int c = 0; c < NCH; c++) begin
    if (dram_wr_valid[c] && dram_wr_ready[c]) begin
      if (dram_wr_chips[c][16][56]) n_enc_wr++; else n_byp_wr++;
    end
    if (dram_rsp_valid[c] && dram_rsp_ready[c]) begin
      if (dram_rsp_chips[c][16][56]) n_dec_rd++; else n_byp_rd++;
    end
    if ((dram_wr_valid[c] && !dram_wr_ready[c]) || (dram_rd_valid[c] && !dram_rd_ready[c])) n_stall++;
  end

  // ---------------- helpers ----------------
  function automatic int ch_of(input logic [31:0] a);  return int'((a >> 7) % NCH); endfunction
  function automatic int set_of(input logic [31:0] a); return int'(((a >> 7) / NCH) % SETS); endfunction

  task automatic access(input op_e op, input logic [31:0] a, input logic [31:0] d, input logic enc,
                        output logic [31:0] r, output longint lat);
    int c; longint t0;
    c = ch_of(a);
    @(negedge clk);
    core_req_valid[c] = 1; core_req_op[c] = op; core_req_addr[c] = a; core_req_wdata[c] = d; core_req_enc[c] = enc;
    do @(posedge clk); while (!core_req_ready[c]);
    t0 = cyc;
    #1 core_req_valid[c] = 0;
    do @(posedge clk); while (!core_rsp_valid[c]);
    r = core_rsp_rdata[c]; lat = cyc - t0;
  endtask

  logic [31:0] plain [logic [31:0]];    // reference word memory
  logic        lenc  [logic [31:0]];    // flag per line
  logic [31:0] lines [$];               // workload lines

  function automatic line_t plain_line(input logic [31:0] la);
    line_t l;
    l = '0;
    for (int w = 0; w < 32; w++)
      l.data[w/2][32*(w%2) +: 32] = plain.exists(la + 32'(4*w)) ? plain[la + 32'(4*w)] : 32'h0;
    return l;
  endfunction

  function automatic line_t ctr_xor(input line_t l, input logic [31:0] a, input logic [55:0] c);
    line_t o;
    o = l;
    for (int k = 0; k < 8; k++)
      o.data[2*k +: 2] = l.data[2*k +: 2] ^ encrypt(key, {8'h00, c, 64'(a >> 4) + 64'(k)});
    return o;
  endfunction

  function automatic line_t dram_line(input logic [31:0] la);
    line_t l;
    int c;
    c = ch_of(la);
    for (int j = 0; j < 16; j++) l.data[j] = peek(c, j, la);
    l.ca = ctr_area_t'(peek(c, 16, la));
    return l;
  endfunction

  function automatic logic [63:0] peek(input int c, input int j, input logic [31:0] a);
    case (c)
      0: return g_dram[0].u_dram.peek_chip(j, a);
      1: return g_dram[1].u_dram.peek_chip(j, a);
      2: return g_dram[2].u_dram.peek_chip(j, a);
      3: return g_dram[3].u_dram.peek_chip(j, a);
      4: return g_dram[4].u_dram.peek_chip(j, a);
      default: return g_dram[5].u_dram.peek_chip(j, a);
    endcase
  endfunction

  // evict every workload line: read 16 other lines of the same channel and set
  task automatic evict_all();
    bit done [int];
    logic [31:0] r; longint lat;
    foreach (lines[i]) begin
      int c, s;
      c = ch_of(lines[i]); s = set_of(lines[i]);
      if (!done.exists(c * SETS + s)) begin
        done[c * SETS + s] = 1;
        for (int m = 0; m < 16; m++)
          access(OP_READ, 32'(((s + SETS * (512 + m)) * NCH + c) << 7), 0, 0, r, lat);
      end
    end
  endtask

  // check what a snooper finds in DRAM for every workload line
  task automatic check_dram(input logic [55:0] exp_ctr, input bit check_fresh, ref line_t prev [logic [31:0]]);
    foreach (lines[i]) begin
      line_t got, exp;
      logic [31:0] la;
      la = lines[i];
      got = dram_line(la);
      exp = plain_line(la);
      checks++;
      if (got.ca.enc !== lenc[la]) begin failures++; $display("FAIL flag of %h", la); end
      if (lenc[la]) begin
        checks++;
        if (got.ca.ctr !== exp_ctr) begin failures++; $display("FAIL ctr of %h = %0d", la, got.ca.ctr); end
        checks++;
        if (got.data !== ctr_xor(exp, la, exp_ctr).data) begin failures++; $display("FAIL ciphertext of %h", la); end
        if (exp_ctr == 2) n_ctr2++;
        if (check_fresh) begin
          // block 7 holds the same plaintext as before; its ciphertext must differ
          checks++;
          if (got.data[15:14] === prev[la].data[15:14]) begin failures++; $display("FAIL pad reused at %h", la); end
          else n_fresh_pad++;
        end
      end else begin
        checks++;
        if (got.data !== exp.data || got.ca.ctr !== 0) begin failures++; $display("FAIL bypass line %h", la); end
      end
      prev[la] = got;
    end
  endtask

  // ---------------- the test ----------------
  initial begin
    int   wgt [NX][NY][K];
    int   l1 [NX];
    bit   sel [NX];
    logic [31:0] r, a;
    longint lat;
    line_t prev [logic [31:0]];
    int   n_sel;

    key = {$urandom, $urandom, $urandom, $urandom};
    for (int c = 0; c < NCH; c++) core_req_op[c] = OP_READ;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); key_load = 1; @(negedge clk); key_load = 0;
    repeat (12) @(negedge clk);
    checks++;
    if (!key_ready) begin failures++; $display("FAIL key_ready"); end

    // smart encryption: rank kernel rows by l1-norm, encrypt the top half
    for (int x = 0; x < NX; x++) begin
      l1[x] = 0;
      for (int y = 0; y < NY; y++) for (int k = 0; k < K; k++) begin
        wgt[x][y][k] = $urandom_range(0, 200) - 100 + (x % 3) * 40;
        l1[x] += (wgt[x][y][k] < 0) ? -wgt[x][y][k] : wgt[x][y][k];
      end
    end
    n_sel = 0;
    for (int x = 0; x < NX; x++) begin
      int rank;
      rank = 0;
      for (int x2 = 0; x2 < NX; x2++)
        if (l1[x2] > l1[x] || (l1[x2] == l1[x] && x2 < x)) rank++;
      sel[x] = (rank < NX / 2);
      if (sel[x]) n_sel++;
    end
    checks++;
    if (n_sel != NX / 2) begin failures++; $display("FAIL selection"); end

    // allocate: kernel row x -> 3 lines, input channel x -> 2 lines
    for (int x = 0; x < NX; x++) begin
      for (int l = 0; l < 3; l++) begin
        a = 32'h0010_0000 + 32'(x * 384 + l * 128); lines.push_back(a); lenc[a] = sel[x];
      end
      for (int l = 0; l < 2; l++) begin
        a = 32'h0020_0000 + 32'(x * 256 + l * 128); lines.push_back(a); lenc[a] = sel[x];
      end
    end
    foreach (lines[i]) access(OP_ATTR, lines[i], 0, lenc[lines[i]], r, lat);   // emalloc()/malloc()

    // write weights and input feature maps
    for (int x = 0; x < NX; x++) begin
      for (int y = 0; y < NY; y++) for (int k = 0; k < K; k++) begin
        a = 32'h0010_0000 + 32'(x * 384 + 4 * (y * K + k));
        plain[a] = 32'(wgt[x][y][k]);
        access(OP_WRITE, a, plain[a], 0, r, lat);
      end
      for (int p = 0; p < 64; p++) begin
        a = 32'h0020_0000 + 32'(x * 256 + 4 * p);
        plain[a] = $urandom;
        access(OP_WRITE, a, plain[a], 0, r, lat);
      end
    end
    // one hit latency measurement
    access(OP_READ, 32'h0010_0000, 0, 0, r, lat);
    checks++;
    if (lat != 10) begin failures++; $display("FAIL hit latency %0d", lat); end

    evict_all();
    check_dram(56'd1, 1'b0, prev);

    // read everything back through decryption / bypass
    foreach (lines[i])
      for (int w = 0; w < 32; w++) begin
        a = lines[i] + 32'(4 * w);
        access(OP_READ, a, 0, 0, r, lat);
        checks++;
        if (r !== (plain.exists(a) ? plain[a] : 32'h0)) begin
          failures++; $display("FAIL read %h: %h", a, r);
        end
      end

    // rewrite word 0 of every line, evict again: counter 2, fresh pads
    foreach (lines[i]) begin
      plain[lines[i]] = $urandom;
      access(OP_WRITE, lines[i], plain[lines[i]], 0, r, lat);
    end
    evict_all();
    check_dram(56'd2, 1'b1, prev);

    // mechanisms
    begin
      longint h, m, wb;
      h = 0; m = 0; wb = 0;
      for (int c = 0; c < NCH; c++) begin
        h += stat_hits[c]; m += stat_misses[c]; wb += stat_writebacks[c];
      end
      $display("mechanisms: aes_write=%0d aes_read=%0d bypass_write=%0d bypass_read=%0d hits=%0d misses=%0d writebacks=%0d dram_stalls=%0d ctr2=%0d fresh_pads=%0d",
               n_enc_wr, n_dec_rd, n_byp_wr, n_byp_rd, h, m, wb, n_stall, n_ctr2, n_fresh_pad);
      checks++; if (n_enc_wr == 0) begin failures++; $display("FAIL no AES write"); end
      checks++; if (n_dec_rd == 0) begin failures++; $display("FAIL no AES read"); end
      checks++; if (n_byp_wr == 0) begin failures++; $display("FAIL no bypass write"); end
      checks++; if (n_byp_rd == 0) begin failures++; $display("FAIL no bypass read"); end
      checks++; if (h == 0 || m == 0 || wb == 0) begin failures++; $display("FAIL cache events"); end
      checks++; if (n_stall == 0) begin failures++; $display("FAIL no back-pressure"); end
      checks++; if (n_ctr2 == 0 || n_fresh_pad == 0) begin failures++; $display("FAIL no counter advance"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
