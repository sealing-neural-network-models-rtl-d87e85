// aes128_pipe -- fully pipelined AES-128 encryption engine (one-time-pad
// generator of the memory encryption engine).
//
// What it does: out_block = AES-128_key(in_block), FIPS-197. In counter mode
// the input is the seed built from a line address and its counter, and the
// output is the one-time pad that is XORed with the data; only encryption is
// ever needed, for reads and writes alike.
//
// How it works: the key schedule runs once per key_load, iteratively, one
// round key per cycle, into eleven 128-bit round-key registers; key_ready
// rises when all eleven hold. The datapath has 11 register stages: stage 0
// registers in_block ^ rk[0]; stages 1..9 register one full round each and
// stage 10 the final round (no MixColumns). A side-band tag travels with each
// block so the user can tell the pads apart.
//
// Interface and timing: a block presented with in_valid in cycle t appears on
// out_block with out_valid in cycle t + PIPE_LAT (11). One block per cycle,
// no back-pressure. in_valid must stay low until key_ready.
//
// From the paper: a pipelined AES engine with a 128-bit block, one per memory
// controller, acting as OTP generator for counter-mode encryption. This
// design's choices: the 128-bit key, the stage count (chosen so that a
// 128-byte line, eight blocks, costs the paper's 20 cycles in the controller),
// the iterative key schedule and the tag.
module aes128_pipe #(
  parameter int TAG_W = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               key_load,
  input  logic [127:0]       key,
  output logic               key_ready,
  input  logic               in_valid,
  input  logic [127:0]       in_block,
  input  logic [TAG_W-1:0]   in_tag,
  output logic               out_valid,
  output logic [127:0]       out_block,
  output logic [TAG_W-1:0]   out_tag
);
  import aes_pkg::*;

  localparam int NR = 10;   // rounds; the pipeline latency is NR + 1

  // ---------------- key schedule ----------------
  logic [127:0] rk [NR+1];
  logic [3:0]   kidx;       // next round key to compute, 1..NR; NR+1 = done
  logic [7:0]   rcon;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      kidx      <= 4'd0;
      rcon      <= 8'h01;
      key_ready <= 1'b0;
      for (int i = 0; i <= NR; i++) rk[i] <= '0;
    end else if (key_load) begin
      rk[0]     <= key;
      kidx      <= 4'd1;
      rcon      <= 8'h01;
      key_ready <= 1'b0;
    end else if (kidx >= 4'd1 && kidx <= 4'(NR)) begin
      rk[kidx]  <= next_round_key(rk[kidx-1], rcon);
      rcon      <= xtime(rcon);
      kidx      <= kidx + 4'd1;
      key_ready <= (kidx == 4'(NR));
    end
  end

  // ---------------- datapath ----------------
  logic [127:0]     st  [NR+1];
  logic [TAG_W-1:0] tg  [NR+1];
  logic [NR:0]      vld;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      vld <= '0;
    end else begin
      vld <= {vld[NR-1:0], in_valid};
    end
  end

  always_ff @(posedge clk) begin
    st[0] <= in_block ^ rk[0];
    tg[0] <= in_tag;
    for (int r = 1; r < NR; r++) begin
      st[r] <= aes_round(st[r-1], rk[r]);
      tg[r] <= tg[r-1];
    end
    st[NR] <= aes_final_round(st[NR-1], rk[NR]);
    tg[NR] <= tg[NR-1];
  end

  assign out_valid = vld[NR];
  assign out_block = st[NR];
  assign out_tag   = tg[NR];

`ifndef SYNTHESIS
  a_key_before_use: assert property (@(posedge clk) disable iff (!rst_n)
                                     in_valid |-> key_ready)
    else $error("aes128_pipe: block issued before the key schedule finished");
`endif

endmodule
