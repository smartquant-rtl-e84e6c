// region_decoder: memory logical space bloating.
//
// The device exposes to the host a logical space made of s regions laid end to end,
// region P_i holding the L weights of the model in format i, L*N_i bits in all
// (P_1 full precision, then FP12, FP8, FP6, FP4; FP0 takes no space). Only the
// L*N_1 bits of the full-precision model exist in DRAM. This block takes the line
// address of a host request and returns which region it falls in, which 512-weight
// block it belongs to and which of that block's N_i packed output lines it is.
// Region order, contiguity and sizes follow the paper; the region base at logical
// address 0 and the block of 512 weights are this design's choices.
//
// Interface: purely combinational. line_addr -> {hit, fmt, blk, sub}.
// hit is low for an address beyond the last region.
module region_decoder
  import sq_pkg::*;
#(
  parameter longint unsigned L_WEIGHTS = 64'd30_000_000_000  // L, must be a multiple of 512
) (
  input  logic [LADDR_W-1:0] line_addr,
  output logic               hit,
  output fmt_t               fmt,
  output logic [DADDR_W-1:0] blk,
  output logic [SUB_W-1:0]   sub
);

  localparam longint unsigned NBLK = L_WEIGHTS / 64'(BLK_W);

  // Sum of N_j over the regions before region i.
  function automatic longint unsigned cum_bits(input int unsigned i);
    longint unsigned s = 0;
    for (int unsigned j = 0; j < i; j++) s += 64'(fmt_desc(fmt_t'(j)).nbits);
    return s;
  endfunction

  logic [NFMT-1:0]      hit_v;
  logic [DADDR_W-1:0]   blk_v [NFMT];
  logic [SUB_W-1:0]     sub_v [NFMT];

  for (genvar i = 0; i < NFMT; i++) begin : g_region
    localparam longint unsigned NB   = 64'(fmt_desc(fmt_t'(i)).nbits);
    localparam longint unsigned BASE = NBLK * cum_bits(i);
    localparam longint unsigned SIZE = NBLK * NB;
    localparam longint unsigned DIV  = (NB == 0) ? 64'd1 : NB;
    logic [63:0] rel;
    assign rel      = 64'(line_addr) - BASE;
    assign hit_v[i] = (SIZE != 0) && (64'(line_addr) >= BASE) && (rel < SIZE);
    assign blk_v[i] = DADDR_W'(rel / DIV);
    assign sub_v[i] = SUB_W'(rel % DIV);
  end

  always_comb begin
    hit = 1'b0;
    fmt = '0;
    blk = '0;
    sub = '0;
    for (int i = 0; i < NFMT; i++) begin
      if (hit_v[i]) begin
        hit = 1'b1;
        fmt = fmt_t'(i);
        blk = blk_v[i];
        sub = sub_v[i];
      end
    end
  end

endmodule
