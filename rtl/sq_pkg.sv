// sq_pkg: shared types and constants of the SmartQuant model-store controller.
//
// The full-precision weight is a 16-bit float: 1 sign bit, NE=5 exponent bits and
// NM=10 mantissa bits (IEEE binary16 split; the paper names FP16 but not its split).
// The weight is stored in DRAM as 16 bit-planes; plane p (0..15) holds bit 15-p of
// every weight, so plane 0 is the sign (the paper's b1) and plane 15 the mantissa
// LSB (b16).
//
// The set of supported formats follows the paper's evaluation: FP16, FP12, FP8,
// FP6, FP4 and FP0 (a skipped weight, no storage). Their exponent/mantissa splits
// are this design's choice: FP12 = E5M6 and FP8 = E5M2 are the top bits of FP16,
// FP6 = E3M2 and FP4 = E2M1 are the common small-float splits.
//
// All transfers, host and DRAM, are 64-byte lines (LINE_BITS = 512). A block is
// 512 consecutive weights: one line of each bit-plane, and N_i lines of packed
// output in format i.
package sq_pkg;

  localparam int unsigned N1        = 16;   // bits of the full-precision weight
  localparam int unsigned NE        = 5;    // exponent bits of the full-precision weight
  localparam int unsigned NM        = 10;   // mantissa bits of the full-precision weight
  localparam int unsigned LINE_BITS = 512;  // host / DRAM transfer unit (64 B)
  localparam int unsigned LINE_BYTES = LINE_BITS / 8;
  localparam int unsigned BLK_W     = LINE_BITS; // weights per block (one plane line)
  localparam int unsigned NFMT      = 6;    // s, number of quantization formats
  localparam int unsigned FMT_W     = 3;    // width of a format index
  localparam int unsigned ADDR_W    = 52;   // host byte address width
  localparam int unsigned LADDR_W   = ADDR_W - 6; // host line address width
  localparam int unsigned DADDR_W   = 40;   // DRAM line address width
  localparam int unsigned SUB_W     = 4;    // line index inside a block (< 16)
  localparam int unsigned BLKBUF_BITS = BLK_W * N1; // packed output of one block, worst case

  typedef logic [FMT_W-1:0] fmt_t;

  // Format table, index i = region P_{i+1}.
  typedef struct packed {
    logic [4:0] nbits;   // N_i
    logic [2:0] re;      // exponent bits r_e
    logic [3:0] rm;      // mantissa bits r_m
  } fmt_desc_t;

  function automatic fmt_desc_t fmt_desc(input fmt_t f);
    case (f)
      3'd0:    return '{nbits: 5'd16, re: 3'd5, rm: 4'd10}; // FP16
      3'd1:    return '{nbits: 5'd12, re: 3'd5, rm: 4'd6};  // FP12
      3'd2:    return '{nbits: 5'd8,  re: 3'd5, rm: 4'd2};  // FP8
      3'd3:    return '{nbits: 5'd6,  re: 3'd3, rm: 4'd2};  // FP6
      3'd4:    return '{nbits: 5'd4,  re: 3'd2, rm: 4'd1};  // FP4
      default: return '{nbits: 5'd0,  re: 3'd0, rm: 4'd0};  // FP0 (skipped)
    endcase
  endfunction

  // Extra bit-planes fetched for rounding (the paper's d_e, d_m; 0..2).
  typedef struct packed {
    logic [1:0] de;
    logic [1:0] dm;
  } round_cfg_t;

  // Host side: simplified CXL.mem transactions (M2S Req/RwD in, S2M DRS/NDR out).
  typedef enum logic [0:0] { HOST_RD = 1'b0, HOST_WR = 1'b1 } host_op_e;

  typedef struct packed {
    host_op_e              op;
    logic [ADDR_W-1:0]     addr;   // byte address, bits [5:0] ignored
    logic [11:0]           tag;
    logic [LINE_BITS-1:0]  wdata;
  } host_req_t;

  typedef struct packed {
    host_op_e              op;     // HOST_RD: data response, HOST_WR: completion
    logic [11:0]           tag;
    logic                  err;    // address outside a readable/writable region
    logic [LINE_BITS-1:0]  rdata;
  } host_rsp_t;

  // DRAM side: line requests to the DRAM channel controller.
  typedef struct packed {
    logic                   we;
    logic [DADDR_W-1:0]     addr;  // line address
    logic [LINE_BYTES-1:0]  be;    // byte enables of a write
    logic [LINE_BITS-1:0]   wdata;
  } dram_req_t;

endpackage
