// seal_pkg -- types and constants shared by the SEAL memory-side blocks.
//
// A memory line in colocation mode (ColoE) is 136 bytes: 128 bytes of data
// plus an 8-byte counter area stored beside it in the same DRAM burst. The
// counter area holds a 56-bit per-line write counter and, in one of the eight
// spare bits, the smart-encryption flag that says whether the line was
// allocated with emalloc() (encrypted) or malloc() (bypasses AES).
// The 128-byte line, the 64-bit counter area, the 56-bit counter and the
// one-bit flag follow the paper; the bit positions inside the counter area
// (counter in 55:0, flag in bit 56, 63:57 zero) are this design's choice.
//
// In DRAM the line is spread over 17 chips of one rank: 16 data chips carry
// 8 bytes each (data word j goes to chip j) and the 17th chip carries the
// counter area, like the ECC chip of an ECC DIMM.
package seal_pkg;

  localparam int LINE_BYTES    = 128;
  localparam int DATA_CHIPS    = 16;                 // 8 bytes per chip
  localparam int CTR_BITS      = 56;
  localparam int AES_BLOCKS    = LINE_BYTES / 16;    // 8 AES blocks per line

  typedef struct packed {
    logic [6:0]          rsvd;   // unused spare bits, written as zero
    logic                enc;    // 1: emalloc() line, encrypted; 0: malloc(), bypass
    logic [CTR_BITS-1:0] ctr;    // per-line counter, +1 on each encrypted write
  } ctr_area_t;

  typedef struct packed {
    ctr_area_t                    ca;    // stored in the counter chip
    logic [DATA_CHIPS-1:0][63:0]  data;  // data[j] stored in data chip j
  } line_t;

  // Core-side request kinds of an L2 slice.
  typedef enum logic [1:0] {
    OP_READ  = 2'd0,   // 32-bit word read
    OP_WRITE = 2'd1,   // 32-bit word write
    OP_ATTR  = 2'd2    // set the line's flag: emalloc (enc=1) or malloc (enc=0)
  } op_e;

  // Counter-mode seed of AES block k of the line at byte address addr.
  function automatic logic [127:0] otp_seed(input logic [63:0] addr,
                                            input logic [CTR_BITS-1:0] ctr,
                                            input int unsigned k);
    logic [63:0] blk;
    blk = (addr >> 4) + 64'(k);
    return {8'h00, ctr, blk};
  endfunction

endpackage
