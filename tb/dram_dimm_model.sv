// dram_dimm_model -- behavioural model (not synthesizable) of one DRAM
// channel whose rank has 16 data chips and one counter chip. Each 136-byte
// line is stored as 17 chip words: word j (0..15) in data chip j, word 16,
// the counter area, in the counter chip. Unwritten memory reads as zero
// (counter 0, flag clear). Reads are answered in order RD_LAT cycles after
// the request (outputs change on the falling edge); writes are stored when accepted. With STALL set, rd_ready and
// wr_ready drop at random, so the controller sees back-pressure. peek_chip()
// lets a testbench look at what a bus snooper would have seen.
module dram_dimm_model #(
  parameter int ADDR_W = 32,
  parameter int RD_LAT = 20,
  parameter bit STALL  = 1'b1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                rd_valid,
  output logic                rd_ready,
  input  logic [ADDR_W-1:0]   rd_addr,
  output logic                rsp_valid,
  input  logic                rsp_ready,
  output logic [ADDR_W-1:0]   rsp_addr,
  output logic [16:0][63:0]   rsp_chips,
  input  logic                wr_valid,
  output logic                wr_ready,
  input  logic [ADDR_W-1:0]   wr_addr,
  input  logic [16:0][63:0]   wr_chips
);
  logic [63:0] chip_mem [logic [ADDR_W+4:0]];   // key: {chip, line address}

  function automatic logic [63:0] peek_chip(input int chip, input logic [ADDR_W-1:0] a);
    logic [ADDR_W+4:0] k;
    k = {5'(chip), a};
    return chip_mem.exists(k) ? chip_mem[k] : 64'h0;
  endfunction

  logic [ADDR_W-1:0] q_addr [$];
  longint            q_time [$];
  longint            cyc = 0;
  int                stalls = 0;

  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) begin
    rd_ready <= !STALL || ($urandom_range(0, 3) != 0);
    wr_ready <= !STALL || ($urandom_range(0, 3) != 0);
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      q_addr.delete(); q_time.delete();
    end else begin
      if ((rd_valid && !rd_ready) || (wr_valid && !wr_ready)) stalls++;
      if (rd_valid && rd_ready) begin
        q_addr.push_back(rd_addr);
        q_time.push_back(cyc + RD_LAT);
      end
      if (wr_valid && wr_ready)
        for (int j = 0; j < 17; j++) chip_mem[{5'(j), wr_addr}] = wr_chips[j];
      if (rsp_valid && rsp_ready) begin
        void'(q_addr.pop_front());
        void'(q_time.pop_front());
      end
    end
  end

  // outputs change only between clock edges
  always @(negedge clk) begin
    rsp_valid <= 1'b0;
    if (q_addr.size() > 0 && q_time[0] <= cyc) begin
      rsp_valid <= 1'b1;
      rsp_addr  <= q_addr[0];
      for (int j = 0; j < 17; j++) rsp_chips[j] <= peek_chip(j, q_addr[0]);
    end
  end
endmodule
