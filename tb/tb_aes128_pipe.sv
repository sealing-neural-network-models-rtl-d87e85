// tb_aes128_pipe -- self-checking test of the pipelined AES-128 engine.
// Checks the two FIPS-197 example vectors, then streams random blocks back to
// back under a random key and compares every output with the reference model
// in aes_ref_pkg, its tag, and that it arrives exactly 11 cycles after issue.
// A second key load checks that the key schedule is redone.
module tb_aes128_pipe;
  import aes_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         key_load = 0, key_ready;
  logic [127:0] key = '0;
  logic         in_valid = 0, out_valid;
  logic [127:0] in_block = '0, out_block;
  logic [7:0]   in_tag = '0, out_tag;

  aes128_pipe dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // expected-output queue: block, tag, issue cycle
  logic [127:0] exp_q [$];
  logic [7:0]   tag_q [$];
  longint       cyc_q [$];
  int           n_out = 0;

  always @(posedge clk) if (rst_n && out_valid) begin
    logic [127:0] e; logic [7:0] t; longint c;
    if (exp_q.size() == 0) begin
      failures++; $display("unexpected output %h", out_block);
    end else begin
      e = exp_q.pop_front(); t = tag_q.pop_front(); c = cyc_q.pop_front();
      checks++;
      if (out_block !== e || out_tag !== t) begin
        failures++; $display("FAIL block: got %h/%0d expected %h/%0d", out_block, out_tag, e, t);
      end
      checks++;
      if (cyc - c != 11) begin
        failures++; $display("FAIL latency %0d", cyc - c);
      end
      n_out++;
    end
  end

  task automatic load_key(input logic [127:0] k);
    @(negedge clk); key = k; key_load = 1;
    @(negedge clk); key_load = 0;
    repeat (12) @(negedge clk);
    checks++;
    if (!key_ready) begin failures++; $display("FAIL key_ready not set"); end
  endtask

  task automatic issue(input logic [127:0] pt, input logic [127:0] exp, input logic [7:0] tg);
    in_valid = 1; in_block = pt; in_tag = tg;
    exp_q.push_back(exp); tag_q.push_back(tg); cyc_q.push_back(cyc);
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    logic [127:0] k, pt;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // FIPS-197 Appendix C.1
    load_key(128'h000102030405060708090a0b0c0d0e0f);
    issue(128'h00112233445566778899aabbccddeeff, 128'h69c4e0d86a7b0430d8cdb78070b4c55a, 8'd1);
    repeat (15) @(negedge clk);
    // FIPS-197 Appendix B
    load_key(128'h2b7e151628aed2a6abf7158809cf4f3c);
    issue(128'h3243f6a8885a308d313198a2e0370734, 128'h3925841d02dc09fbdc118597196a0b32, 8'd2);
    repeat (15) @(negedge clk);
    // random key, back-to-back random blocks
    k = {$urandom, $urandom, $urandom, $urandom};
    load_key(k);
    for (int i = 0; i < 40; i++) begin
      pt = {$urandom, $urandom, $urandom, $urandom};
      issue(pt, encrypt(k, pt), 8'(i + 10));
    end
    repeat (20) @(negedge clk);
    checks++;
    if (n_out != 42 || exp_q.size() != 0) begin
      failures++; $display("FAIL output count %0d", n_out);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
