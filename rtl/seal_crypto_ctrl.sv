// seal_crypto_ctrl -- the encryption part of one SEAL memory controller:
// colocation-mode counter encryption (ColoE) with a smart-encryption bypass.
//
// What it does. Every 136-byte line that crosses the controller carries its
// own 8-byte counter area (56-bit counter + emalloc flag), so no counter is
// ever fetched from memory and no counter cache exists.
//  * Write-back path (L2 -> DRAM): a line whose flag is set has its counter
//    incremented by one and its 128 data bytes XORed with eight AES pads, one
//    per 16-byte block; the pad of block k is AES_key(seed(addr, ctr, k)).
//    The new counter area is written with the ciphertext.
//  * Read path (DRAM -> L2): a flagged line is decrypted with pads computed
//    from the counter that arrived in the same burst.
//  * Lines whose flag is clear (malloc() memory) bypass the AES engine and
//    pass through one register on either path, at full rate.
//
// How it works. One pipelined AES engine (aes128_pipe) is shared by both
// paths. An accepted encrypted line takes one of NSLOT line slots and issues
// its eight seeds on the eight following cycles; the pads come back tagged
// with slot and block number and are stored in the slot. Slots retire in
// order: when the oldest has all eight pads its XORed line is offered on
// mw_* (writes) or fill_* (reads). With NSLOT = 3 a new line can start every
// 8 cycles, which keeps the engine busy. If a read and a write both want the
// engine in the same cycle the read goes first. Bypassed lines use their own
// registers and may overtake encrypted lines. Each output port prefers the
// AES result but holds its choice while a line waits for ready.
//
// Interface and timing. All four line ports use valid/ready; data must stay
// stable while valid waits for ready. An encrypted line accepted in cycle t is
// offered in cycle t + 20 (8 issue cycles + 11 AES stages + 1), the paper's
// 20-cycle line latency; a bypassed line in cycle t + 1. wr_pending is high
// while any write-back is still inside. No line is accepted for encryption
// until key_ready.
//
// From the paper: ColoE itself, the 136 B line, 56-bit counter and flag bit,
// incrementing the counter on each write, the flag-controlled bypass, one AES
// engine per controller and the 20-cycle line latency. This design's choices:
// the seed layout (seal_pkg::otp_seed), the bit positions of the flag, the
// slot scheme, read priority and the handshakes.
module seal_crypto_ctrl
  import seal_pkg::*;
#(
  parameter int ADDR_W = 32,
  parameter int NSLOT  = 3
) (
  input  logic              clk,
  input  logic              rst_n,
  // global key
  input  logic              key_load,
  input  logic [127:0]      key,
  output logic              key_ready,
  // write-back from L2 (plaintext)
  input  logic              wb_valid,
  output logic              wb_ready,
  input  logic [ADDR_W-1:0] wb_addr,
  input  line_t             wb_line,
  // write to DRAM
  output logic              mw_valid,
  input  logic              mw_ready,
  output logic [ADDR_W-1:0] mw_addr,
  output line_t             mw_line,
  // read data from DRAM
  input  logic              mr_valid,
  output logic              mr_ready,
  input  logic [ADDR_W-1:0] mr_addr,
  input  line_t             mr_line,
  // fill to L2 (plaintext)
  output logic              fill_valid,
  input  logic              fill_ready,
  output logic [ADDR_W-1:0] fill_addr,
  output line_t             fill_line,
  // status
  output logic              wr_pending,
  output logic [31:0]       aes_lines,     // lines that went through AES
  output logic [31:0]       bypass_lines   // lines that bypassed AES
);

  localparam int SW    = (NSLOT > 1) ? $clog2(NSLOT) : 1;
  localparam int TAG_W = SW + 3;

  // ---------------- AES engine ----------------
  logic               aes_in_valid, aes_out_valid;
  logic [127:0]       aes_in_block, aes_out_block;
  logic [TAG_W-1:0]   aes_in_tag, aes_out_tag;

  aes128_pipe #(.TAG_W(TAG_W)) u_aes (
    .clk, .rst_n, .key_load, .key, .key_ready,
    .in_valid (aes_in_valid), .in_block (aes_in_block), .in_tag (aes_in_tag),
    .out_valid(aes_out_valid), .out_block(aes_out_block), .out_tag(aes_out_tag)
  );

  // ---------------- line slots ----------------
  logic [NSLOT-1:0]   s_v;      // slot holds a line
  logic [NSLOT-1:0]   s_rd;     // 1: read (decrypt to L2), 0: write (encrypt to DRAM)
  logic [ADDR_W-1:0]  s_addr [NSLOT];
  line_t              s_line [NSLOT];
  logic [127:0]       s_otp  [NSLOT][AES_BLOCKS];
  logic [3:0]         s_cnt  [NSLOT];   // pads received

  logic [SW-1:0]      alloc_ptr, head_ptr, iss_slot;
  logic               issuing;
  logic [2:0]         iss_k;

  function automatic logic [SW-1:0] inc_ptr(input logic [SW-1:0] p);
    return (int'(p) == NSLOT - 1) ? '0 : p + 1'b1;
  endfunction

  // ---------------- bypass registers ----------------
  logic              bw_v, br_v;
  logic [ADDR_W-1:0] bw_addr, br_addr;
  line_t             bw_line, br_line;

  // ---------------- head of the slot queue ----------------
  logic  head_done;
  line_t head_xor;

  assign head_done = s_v[head_ptr] && (s_cnt[head_ptr] == 4'(AES_BLOCKS));

  always_comb begin
    head_xor = s_line[head_ptr];
    for (int k = 0; k < AES_BLOCKS; k++)
      head_xor.data[2*k +: 2] = s_line[head_ptr].data[2*k +: 2] ^ s_otp[head_ptr][k];
  end

  // Each output prefers the AES result, but once a line has been offered and
  // not taken the choice is held, so that valid data never changes under it.
  logic sel_aes_w, sel_aes_r;
  logic mw_lock, mw_lock_aes, fill_lock, fill_lock_aes;
  assign sel_aes_w = mw_lock   ? mw_lock_aes   : (head_done && !s_rd[head_ptr]);
  assign sel_aes_r = fill_lock ? fill_lock_aes : (head_done &&  s_rd[head_ptr]);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mw_lock       <= 1'b0;
      mw_lock_aes   <= 1'b0;
      fill_lock     <= 1'b0;
      fill_lock_aes <= 1'b0;
    end else begin
      mw_lock       <= mw_valid && !mw_ready;
      mw_lock_aes   <= sel_aes_w;
      fill_lock     <= fill_valid && !fill_ready;
      fill_lock_aes <= sel_aes_r;
    end
  end

  assign mw_valid   = sel_aes_w || bw_v;
  assign mw_addr    = sel_aes_w ? s_addr[head_ptr] : bw_addr;
  assign mw_line    = sel_aes_w ? head_xor : bw_line;
  assign fill_valid = sel_aes_r || br_v;
  assign fill_addr  = sel_aes_r ? s_addr[head_ptr] : br_addr;
  assign fill_line  = sel_aes_r ? head_xor : br_line;

  logic head_pop;
  assign head_pop = (sel_aes_w && mw_ready) || (sel_aes_r && fill_ready);

  // ---------------- input acceptance ----------------
  logic aes_can, bw_free, br_free;
  logic take_mr_aes, take_wb_aes, take_mr_byp, take_wb_byp;

  assign aes_can = key_ready && !s_v[alloc_ptr] && (!issuing || iss_k == 3'd7);
  assign bw_free = !bw_v || (mw_ready && !sel_aes_w);
  assign br_free = !br_v || (fill_ready && !sel_aes_r);

  assign mr_ready = mr_line.ca.enc ? aes_can : br_free;
  assign wb_ready = wb_line.ca.enc ? (aes_can && !(mr_valid && mr_line.ca.enc)) : bw_free;

  assign take_mr_aes = mr_valid && mr_ready &&  mr_line.ca.enc;
  assign take_mr_byp = mr_valid && mr_ready && !mr_line.ca.enc;
  assign take_wb_aes = wb_valid && wb_ready &&  wb_line.ca.enc;
  assign take_wb_byp = wb_valid && wb_ready && !wb_line.ca.enc;

  // ---------------- seed issue ----------------
  assign aes_in_valid = issuing;
  assign aes_in_block = otp_seed(64'(s_addr[iss_slot]), s_line[iss_slot].ca.ctr, 32'(iss_k));
  assign aes_in_tag   = {iss_slot, iss_k};

  logic [SW-1:0] out_slot;
  logic [2:0]    out_k;
  assign {out_slot, out_k} = aes_out_tag;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_v          <= '0;
      s_rd         <= '0;
      alloc_ptr    <= '0;
      head_ptr     <= '0;
      iss_slot     <= '0;
      issuing      <= 1'b0;
      iss_k        <= '0;
      bw_v         <= 1'b0;
      br_v         <= 1'b0;
      aes_lines    <= '0;
      bypass_lines <= '0;
      for (int i = 0; i < NSLOT; i++) s_cnt[i] <= '0;
    end else begin
      // issue counter
      if (issuing) begin
        iss_k <= iss_k + 3'd1;
        if (iss_k == 3'd7) issuing <= 1'b0;
      end
      // allocate a slot for a line to be encrypted or decrypted
      if (take_mr_aes || take_wb_aes) begin
        s_v[alloc_ptr]    <= 1'b1;
        s_rd[alloc_ptr]   <= take_mr_aes;
        s_addr[alloc_ptr] <= take_mr_aes ? mr_addr : wb_addr;
        s_cnt[alloc_ptr]  <= '0;
        if (take_mr_aes) begin
          s_line[alloc_ptr] <= mr_line;
        end else begin
          s_line[alloc_ptr]         <= wb_line;
          s_line[alloc_ptr].ca.ctr  <= wb_line.ca.ctr + 1'b1;   // +1 on each write
          s_line[alloc_ptr].ca.rsvd <= '0;
        end
        alloc_ptr <= inc_ptr(alloc_ptr);
        iss_slot  <= alloc_ptr;
        issuing   <= 1'b1;
        iss_k     <= '0;
      end
      // collect pads
      if (aes_out_valid) begin
        s_otp[out_slot][out_k] <= aes_out_block;
        s_cnt[out_slot]        <= s_cnt[out_slot] + 4'd1;
      end
      // retire the head
      if (head_pop) begin
        s_v[head_ptr] <= 1'b0;
        head_ptr      <= inc_ptr(head_ptr);
      end
      // bypass registers
      if (take_wb_byp) begin
        bw_v    <= 1'b1;
        bw_addr <= wb_addr;
        bw_line <= wb_line;
      end else if (mw_ready && !sel_aes_w) begin
        bw_v <= 1'b0;
      end
      if (take_mr_byp) begin
        br_v    <= 1'b1;
        br_addr <= mr_addr;
        br_line <= mr_line;
      end else if (fill_ready && !sel_aes_r) begin
        br_v <= 1'b0;
      end
      // statistics
      aes_lines    <= aes_lines    + 32'(take_mr_aes) + 32'(take_wb_aes);
      bypass_lines <= bypass_lines + 32'(take_mr_byp) + 32'(take_wb_byp);
    end
  end

  always_comb begin
    wr_pending = bw_v;
    for (int i = 0; i < NSLOT; i++)
      if (s_v[i] && !s_rd[i]) wr_pending = 1'b1;
  end

`ifndef SYNTHESIS
  a_mw_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                mw_valid && !mw_ready |=> mw_valid && $stable(mw_addr))
    else $error("seal_crypto_ctrl: DRAM write changed while waiting");
  a_fill_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                  fill_valid && !fill_ready |=> fill_valid && $stable(fill_addr))
    else $error("seal_crypto_ctrl: fill changed while waiting");
  a_pad_to_live_slot: assert property (@(posedge clk) disable iff (!rst_n)
                                       aes_out_valid |-> s_v[out_slot])
    else $error("seal_crypto_ctrl: pad for an empty slot");
`endif

endmodule
