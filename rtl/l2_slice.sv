// l2_slice -- the slice of the shared L2 cache that sits in front of one
// memory controller, extended to keep each line's 8-byte counter area.
//
// What it does. A write-back, write-allocate, WAYS-way set-associative cache
// of 128-byte lines. Next to the data of every line it stores the line's
// counter area (56-bit counter and emalloc flag) exactly as it came from
// DRAM, so that when the line is evicted the crypto controller can encrypt it
// with its own counter; no counter is ever looked up elsewhere.
// Core requests are 32-bit word reads and writes, plus OP_ATTR, which sets the
// flag of a line to req_enc: this is how memory handed out by emalloc()
// (enc = 1) or malloc() (enc = 0) is marked. OP_ATTR is served like a write,
// so the line is first fetched and keeps its counter: a counter is never
// reset, and a pad is never reused.
//
// How it works. One request at a time (a blocking cache). The request is
// registered, the set is looked up in the next cycle. On a hit the word is
// read or written and the pseudo-LRU tree updated. On a miss the victim is an
// invalid way or the pseudo-LRU way; a dirty victim is sent on wb_* and the
// slice waits until the controller reports no write pending, so a following
// read of the same address cannot overtake it; then rd_* requests the line
// and fill_* brings it back, decrypted, with its counter area.
// The line address is divided by NCH before the set index is taken, because
// consecutive lines are spread over the NCH memory channels; the tag is the
// whole line address. Accesses are 32-bit and word aligned: address bits 1:0
// are ignored.
//
// Interface and timing. req_* is valid/ready; rsp_valid is a one-cycle pulse
// with rsp_rdata (read data, or zero for writes and OP_ATTR). A hit accepted
// in cycle t responds in cycle t + HIT_LAT. A miss responds one cycle after
// the refill lookup. The counters hits, misses and writebacks count events.
//
// From the paper: 768 KB shared L2 (128 KB per each of six controllers),
// 8 ways, 128-byte lines, 10-cycle latency, and L2 lines that carry flag and
// counter. This design's choices: blocking operation, pseudo-LRU, the channel
// interleave, the OP_ATTR request and the write-back ordering rule.
module l2_slice
  import seal_pkg::*;
#(
  parameter int ADDR_W      = 32,
  parameter int SLICE_BYTES = 131072,
  parameter int WAYS        = 8,
  parameter int HIT_LAT     = 10,
  parameter int NCH         = 6
) (
  input  logic              clk,
  input  logic              rst_n,
  // core side
  input  logic              req_valid,
  output logic              req_ready,
  input  op_e               req_op,
  input  logic [ADDR_W-1:0] req_addr,
  input  logic [31:0]       req_wdata,
  input  logic              req_enc,
  output logic              rsp_valid,
  output logic [31:0]       rsp_rdata,
  // dirty victim to the crypto controller
  output logic              wb_valid,
  input  logic              wb_ready,
  output logic [ADDR_W-1:0] wb_addr,
  output line_t             wb_line,
  input  logic              wr_pending,
  // line read request to DRAM
  output logic              rd_valid,
  input  logic              rd_ready,
  output logic [ADDR_W-1:0] rd_addr,
  // refill from the crypto controller
  input  logic              fill_valid,
  output logic              fill_ready,
  input  logic [ADDR_W-1:0] fill_addr,
  input  line_t             fill_line,
  // statistics
  output logic [31:0]       hits,
  output logic [31:0]       misses,
  output logic [31:0]       writebacks
);

  localparam int OFF_W  = $clog2(LINE_BYTES);            // 7
  localparam int SETS   = SLICE_BYTES / (LINE_BYTES * WAYS);
  localparam int SET_W  = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int TAG_W  = ADDR_W - OFF_W;                // full line address
  localparam int NLINES = SETS * WAYS;
  localparam int IDX_W  = $clog2(NLINES);

  // ---------------- arrays ----------------
  line_t             mem   [NLINES];
  logic [TAG_W-1:0]  tags  [NLINES];
  logic [NLINES-1:0] vld, dirty;
  logic [WAYS-2:0]   plru  [SETS];

  // ---------------- request register ----------------
  op_e               r_op;
  logic [ADDR_W-1:0] r_addr;
  logic [31:0]       r_wdata;
  logic              r_enc;
  logic [15:0]       lat;        // cycles since acceptance

  logic [TAG_W-1:0]  r_tag;
  logic [SET_W-1:0]  r_set;
  logic [4:0]        r_word;
  assign r_tag  = r_addr[ADDR_W-1:OFF_W];
  assign r_set  = SET_W'((r_addr[ADDR_W-1:OFF_W] / TAG_W'(NCH)) % TAG_W'(SETS));
  assign r_word = r_addr[OFF_W-1:2];

  function automatic logic [IDX_W-1:0] lidx(input logic [SET_W-1:0] s, input logic [WAY_W-1:0] w);
    return IDX_W'(int'(s) * WAYS + int'(w));
  endfunction

  // ---------------- lookup ----------------
  logic             hit;
  logic [WAY_W-1:0] hit_way, vic_way;
  logic             have_inv;
  logic [WAY_W-1:0] inv_way;

  always_comb begin
    hit = 1'b0; hit_way = '0; have_inv = 1'b0; inv_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (vld[lidx(r_set, WAY_W'(w))] && tags[lidx(r_set, WAY_W'(w))] == r_tag) begin
        hit = 1'b1; hit_way = WAY_W'(w);
      end
      if (!vld[lidx(r_set, WAY_W'(w))] && !have_inv) begin
        have_inv = 1'b1; inv_way = WAY_W'(w);
      end
    end
  end

  // pseudo-LRU victim: follow the tree bits from the root
  function automatic logic [WAY_W-1:0] plru_victim(input logic [WAYS-2:0] t);
    int idx;
    logic [WAY_W-1:0] w;
    idx = 0; w = '0;
    for (int l = 0; l < WAY_W; l++) begin
      w   = {w[WAY_W-2:0], t[idx]};
      idx = 2 * idx + 1 + int'(t[idx]);
    end
    return w;
  endfunction

  // pseudo-LRU update: make every node on the path point away from way w
  function automatic logic [WAYS-2:0] plru_touch(input logic [WAYS-2:0] t, input logic [WAY_W-1:0] w);
    int idx;
    logic b;
    logic [WAYS-2:0] o;
    o = t; idx = 0;
    for (int l = 0; l < WAY_W; l++) begin
      b      = w[WAY_W-1-l];
      o[idx] = ~b;
      idx    = 2 * idx + 1 + int'(b);
    end
    return o;
  endfunction

  assign vic_way = have_inv ? inv_way : plru_victim(plru[r_set]);

  // ---------------- control ----------------
  typedef enum logic [2:0] {S_IDLE, S_LOOKUP, S_RESP, S_WB, S_WB_WAIT, S_RD, S_FILL} state_e;
  state_e           st;
  logic [WAY_W-1:0] m_way;      // way being refilled
  logic [31:0]      rdata_q;
  logic             refill;     // the lookup after a refill, not counted as a hit

  assign req_ready  = (st == S_IDLE);
  assign wb_valid   = (st == S_WB);
  assign wb_addr    = {tags[lidx(r_set, m_way)], {OFF_W{1'b0}}};
  assign wb_line    = mem[lidx(r_set, m_way)];
  assign rd_valid   = (st == S_RD);
  assign rd_addr    = {r_tag, {OFF_W{1'b0}}};
  assign fill_ready = (st == S_FILL);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st         <= S_IDLE;
      vld        <= '0;
      dirty      <= '0;
      rsp_valid  <= 1'b0;
      rsp_rdata  <= '0;
      hits       <= '0;
      misses     <= '0;
      writebacks <= '0;
      lat        <= '0;
      m_way      <= '0;
      rdata_q    <= '0;
      refill     <= 1'b0;
      for (int s = 0; s < SETS; s++) plru[s] <= '0;
    end else begin
      rsp_valid <= 1'b0;
      if (lat != 16'hFFFF) lat <= lat + 16'd1;
      unique case (st)
        S_IDLE: if (req_valid) begin
          r_op    <= req_op;
          r_addr  <= req_addr;
          r_wdata <= req_wdata;
          r_enc   <= req_enc;
          lat     <= 16'd1;
          refill  <= 1'b0;
          st      <= S_LOOKUP;
        end
        S_LOOKUP: if (hit) begin
          if (!refill) hits <= hits + 32'd1;
          rdata_q <= '0;
          unique case (r_op)
            OP_READ:  rdata_q <= mem[lidx(r_set, hit_way)].data[r_word[4:1]][32*r_word[0] +: 32];
            OP_WRITE: begin
              mem[lidx(r_set, hit_way)].data[r_word[4:1]][32*r_word[0] +: 32] <= r_wdata;
              dirty[lidx(r_set, hit_way)] <= 1'b1;
            end
            default: begin
              mem[lidx(r_set, hit_way)].ca.enc <= r_enc;
              dirty[lidx(r_set, hit_way)] <= 1'b1;
            end
          endcase
          plru[r_set] <= plru_touch(plru[r_set], hit_way);
          st <= S_RESP;
        end else begin
          misses <= misses + 32'd1;
          m_way  <= vic_way;
          st     <= (vld[lidx(r_set, vic_way)] && dirty[lidx(r_set, vic_way)]) ? S_WB : S_RD;
        end
        S_RESP: if (int'(lat) >= HIT_LAT - 1) begin
          rsp_valid <= 1'b1;
          rsp_rdata <= rdata_q;
          st        <= S_IDLE;
        end
        S_WB: if (wb_ready) begin
          writebacks <= writebacks + 32'd1;
          dirty[lidx(r_set, m_way)] <= 1'b0;
          vld[lidx(r_set, m_way)]   <= 1'b0;
          st <= S_WB_WAIT;
        end
        S_WB_WAIT: if (!wr_pending) st <= S_RD;
        S_RD: if (rd_ready) st <= S_FILL;
        S_FILL: if (fill_valid) begin
          mem[lidx(r_set, m_way)]   <= fill_line;
          tags[lidx(r_set, m_way)]  <= r_tag;
          vld[lidx(r_set, m_way)]   <= 1'b1;
          dirty[lidx(r_set, m_way)] <= 1'b0;
          refill <= 1'b1;
          st <= S_LOOKUP;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

`ifndef SYNTHESIS
  a_fill_matches: assert property (@(posedge clk) disable iff (!rst_n)
                                   st == S_FILL && fill_valid |-> fill_addr == rd_addr)
    else $error("l2_slice: refill for another line");
  a_wb_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                wb_valid && !wb_ready |=> wb_valid && $stable(wb_addr))
    else $error("l2_slice: write-back changed while waiting");
`endif

endmodule
