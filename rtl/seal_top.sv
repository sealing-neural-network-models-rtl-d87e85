// seal_top -- memory side of a SEAL-secured DL accelerator: NCH memory
// partitions, each an L2 slice in front of a SEAL crypto controller that
// talks to one DRAM channel.
//
// What it does. Data travel between the on-chip L2 and off-chip DRAM only in
// 136-byte lines (128 B data + 8 B counter area). Lines of memory allocated
// with emalloc() (flag set) are encrypted in counter mode with their own
// co-located counter on the way out and decrypted on the way in; lines from
// malloc() bypass the AES engine. Nothing else is needed on chip: there is no
// counter cache and no extra memory access for counters.
//
// How it works. For each channel c: l2_slice c serves the core-side port c;
// its dirty victims go to seal_crypto_ctrl c, which writes them to DRAM
// channel c; its line reads go straight to DRAM channel c and the returned
// lines pass through the controller back into the slice. All controllers
// share the global key, loaded once with key_load; key_ready is the AND of
// their key schedules.
//
// Interface and timing. Core ports are per channel, as a network on chip
// would deliver them (which channel an address belongs to is decided there;
// the slices assume consecutive 128-byte lines rotate over the channels).
// DRAM ports are per channel and carry a line as 17 chip words of 64 bits:
// words 0..15 go to the 16 data chips, word 16 (the counter area) to the
// counter chip of the rank. All ports are valid/ready except core responses,
// which are one-cycle pulses. A core hit answers after 10 cycles; a line
// through AES spends 20 cycles in the controller.
//
// From the paper: six controllers, one AES engine each, 768 KB of L2 split
// over them, flag and counter kept with every line, 16 + 1 chips per rank.
// This design's choices: per-channel core ports and the interfaces.
module seal_top
  import seal_pkg::*;
#(
  parameter int NCH         = 6,
  parameter int ADDR_W      = 32,
  parameter int SLICE_BYTES = 131072,
  parameter int WAYS        = 8,
  parameter int HIT_LAT     = 10,
  parameter int NSLOT       = 3
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          key_load,
  input  logic [127:0]                  key,
  output logic                          key_ready,
  // core side, one port per channel
  input  logic [NCH-1:0]                core_req_valid,
  output logic [NCH-1:0]                core_req_ready,
  input  op_e                           core_req_op    [NCH],
  input  logic [NCH-1:0][ADDR_W-1:0]    core_req_addr,
  input  logic [NCH-1:0][31:0]          core_req_wdata,
  input  logic [NCH-1:0]                core_req_enc,
  output logic [NCH-1:0]                core_rsp_valid,
  output logic [NCH-1:0][31:0]          core_rsp_rdata,
  // DRAM side, one channel per controller
  output logic [NCH-1:0]                dram_rd_valid,
  input  logic [NCH-1:0]                dram_rd_ready,
  output logic [NCH-1:0][ADDR_W-1:0]    dram_rd_addr,
  input  logic [NCH-1:0]                dram_rsp_valid,
  output logic [NCH-1:0]                dram_rsp_ready,
  input  logic [NCH-1:0][ADDR_W-1:0]    dram_rsp_addr,
  input  logic [NCH-1:0][16:0][63:0]    dram_rsp_chips,
  output logic [NCH-1:0]                dram_wr_valid,
  input  logic [NCH-1:0]                dram_wr_ready,
  output logic [NCH-1:0][ADDR_W-1:0]    dram_wr_addr,
  output logic [NCH-1:0][16:0][63:0]    dram_wr_chips,
  // statistics per channel
  output logic [NCH-1:0][31:0]          stat_aes_lines,
  output logic [NCH-1:0][31:0]          stat_bypass_lines,
  output logic [NCH-1:0][31:0]          stat_hits,
  output logic [NCH-1:0][31:0]          stat_misses,
  output logic [NCH-1:0][31:0]          stat_writebacks
);

  logic [NCH-1:0] kr;
  assign key_ready = &kr;

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    logic              wb_valid, wb_ready, wr_pending;
    logic [ADDR_W-1:0] wb_addr, fill_addr;
    line_t             wb_line, fill_line, mw_line;
    logic              fill_valid, fill_ready;

    l2_slice #(
      .ADDR_W(ADDR_W), .SLICE_BYTES(SLICE_BYTES), .WAYS(WAYS), .HIT_LAT(HIT_LAT), .NCH(NCH)
    ) u_l2 (
      .clk, .rst_n,
      .req_valid (core_req_valid[c]), .req_ready(core_req_ready[c]), .req_op(core_req_op[c]),
      .req_addr  (core_req_addr[c]),  .req_wdata(core_req_wdata[c]), .req_enc(core_req_enc[c]),
      .rsp_valid (core_rsp_valid[c]), .rsp_rdata(core_rsp_rdata[c]),
      .wb_valid, .wb_ready, .wb_addr, .wb_line, .wr_pending,
      .rd_valid  (dram_rd_valid[c]), .rd_ready(dram_rd_ready[c]), .rd_addr(dram_rd_addr[c]),
      .fill_valid, .fill_ready, .fill_addr, .fill_line,
      .hits(stat_hits[c]), .misses(stat_misses[c]), .writebacks(stat_writebacks[c])
    );

    seal_crypto_ctrl #(.ADDR_W(ADDR_W), .NSLOT(NSLOT)) u_ctrl (
      .clk, .rst_n, .key_load, .key, .key_ready(kr[c]),
      .wb_valid, .wb_ready, .wb_addr, .wb_line,
      .mw_valid  (dram_wr_valid[c]), .mw_ready(dram_wr_ready[c]), .mw_addr(dram_wr_addr[c]),
      .mw_line,
      .mr_valid  (dram_rsp_valid[c]), .mr_ready(dram_rsp_ready[c]), .mr_addr(dram_rsp_addr[c]),
      .mr_line   (line_t'(dram_rsp_chips[c])),
      .fill_valid, .fill_ready, .fill_addr, .fill_line,
      .wr_pending,
      .aes_lines(stat_aes_lines[c]), .bypass_lines(stat_bypass_lines[c])
    );

    // line_t packs the counter area above data word 15, so chip 16 is the counter chip
    assign dram_wr_chips[c] = mw_line;
  end

endmodule
