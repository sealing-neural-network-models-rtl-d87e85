// tb_l2_slice -- self-checking test of one L2 slice, shrunk to 4 sets x 8
// ways so that evictions happen often. A memory model behind it stores whole
// 136-byte lines keyed by address, with a counter area that the test chooses
// per line. A word-level reference memory predicts every read. Checks: read
// data, hit latency of exactly HIT_LAT cycles, that an evicted line carries
// the counter area it was filled with (and the flag set by OP_ATTR), that no
// read request is issued while wr_pending is high, and the hit/miss/write-back
// counters.
module tb_l2_slice;
  import seal_pkg::*;

  localparam int NCH = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid = 0, req_ready, req_enc = 0;
  op_e  req_op = OP_READ;
  logic [31:0] req_addr = 0, req_wdata = 0;
  logic rsp_valid; logic [31:0] rsp_rdata;
  logic wb_valid, wb_ready = 1; logic [31:0] wb_addr; line_t wb_line;
  logic wr_pending = 0;
  logic rd_valid, rd_ready = 1; logic [31:0] rd_addr;
  logic fill_valid = 0, fill_ready; logic [31:0] fill_addr = 0; line_t fill_line = '0;
  logic [31:0] hits, misses, writebacks;

  l2_slice #(.SLICE_BYTES(4096), .WAYS(8), .HIT_LAT(10), .NCH(NCH)) dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // backing store and reference
  line_t       mem  [logic [31:0]];
  logic [31:0] refw [logic [31:0]];
  logic        refenc [logic [31:0]];
  int          n_wb = 0;

  function automatic line_t init_line(input logic [31:0] a);
    line_t l;
    for (int j = 0; j < 16; j++) l.data[j] = {a ^ 32'(j), ~a + 32'(j)};
    l.ca = '{rsvd: '0, enc: a[7], ctr: 56'(a) * 3};
    return l;
  endfunction

  function automatic logic [31:0] ref_read(input logic [31:0] a);
    line_t l;
    if (refw.exists(a)) return refw[a];
    l = init_line({a[31:7], 7'b0});
    return l.data[a[6:3]][32*a[2] +: 32];
  endfunction

  // write-back sink: check counter area, hold wr_pending for a few cycles
  always @(posedge clk) if (rst_n && wb_valid && wb_ready) begin
    line_t e;
    e = mem.exists(wb_addr) ? mem[wb_addr] : init_line(wb_addr);
    checks++;
    if (wb_line.ca.ctr !== e.ca.ctr) begin failures++; $display("FAIL wb counter %h", wb_addr); end
    checks++;
    if (wb_line.ca.enc !== (refenc.exists(wb_addr) ? refenc[wb_addr] : e.ca.enc)) begin
      failures++; $display("FAIL wb flag %h", wb_addr);
    end
    mem[wb_addr] = wb_line;
    n_wb++;
    fork begin
      wr_pending <= 1;
      repeat (5) @(posedge clk);
      wr_pending <= 0;
    end join_none
  end

  // read: no request while a write is pending; answer after 7 cycles
  always @(posedge clk) if (rst_n && rd_valid && rd_ready) begin
    logic [31:0] a;
    a = rd_addr;
    checks++;
    if (wr_pending) begin failures++; $display("FAIL read while write pending"); end
    fork begin
      repeat (7) @(posedge clk);
      #1;
      fill_valid = 1; fill_addr = a;
      fill_line = mem.exists(a) ? mem[a] : init_line(a);
      do @(posedge clk); while (!fill_ready);
      #1 fill_valid = 0;
    end join_none
  end

  task automatic access(input op_e op, input logic [31:0] a, input logic [31:0] d, input logic enc,
                        output logic [31:0] r, output longint lat);
    longint t0;
    @(negedge clk);
    req_valid = 1; req_op = op; req_addr = a; req_wdata = d; req_enc = enc;
    do @(posedge clk); while (!req_ready);
    t0 = cyc;
    #1 req_valid = 0;
    do @(posedge clk); while (!rsp_valid);
    r = rsp_rdata; lat = cyc - t0;
  endtask

  initial begin
    logic [31:0] r, a, d, h0;
    longint lat;
    int nacc;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // miss then hit on the same line
    access(OP_READ, 32'h100, 0, 0, r, lat);
    checks++; if (r !== ref_read(32'h100)) begin failures++; $display("FAIL first read"); end
    access(OP_READ, 32'h104, 0, 0, r, lat);
    checks++; if (r !== ref_read(32'h104)) begin failures++; $display("FAIL second read"); end
    checks++; if (lat != 10) begin failures++; $display("FAIL hit latency %0d", lat); end
    // random traffic over 48 lines mapping to few sets
    nacc = 0;
    for (int i = 0; i < 1500; i++) begin
      a = {19'b0, 6'($urandom_range(0, 47)), 5'($urandom), 2'b00};
      case ($urandom_range(0, 9))
        0: begin
          logic e; e = 1'($urandom);
          access(OP_ATTR, a, 0, e, r, lat);
          refenc[{a[31:7], 7'b0}] = e;
        end
        1, 2, 3, 4: begin
          d = $urandom;
          access(OP_WRITE, a, d, 0, r, lat);
          refw[a] = d;
        end
        default: begin
          h0 = hits;
          access(OP_READ, a, 0, 0, r, lat);
          checks++;
          if (r !== ref_read(a)) begin failures++; $display("FAIL read %h got %h exp %h", a, r, ref_read(a)); end
          if (hits != h0) begin
            checks++;
            if (lat != 10) begin failures++; $display("FAIL hit latency %0d", lat); end
          end
        end
      endcase
    end
    repeat (20) @(negedge clk);
    checks++;
    if (hits + misses != 1502 || writebacks != 32'(n_wb) || n_wb == 0) begin
      failures++; $display("FAIL counters h=%0d m=%0d wb=%0d/%0d", hits, misses, writebacks, n_wb);
    end
    $display("hits=%0d misses=%0d writebacks=%0d", hits, misses, writebacks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
