// bitplane_map: bit-plane in-memory placement.
//
// The full-precision model is stored as N_1 = 16 bit-planes, each plane kept in
// DRAM apart from the others, so that a reduced-precision read touches only the
// planes it needs. This block gives (a) the set of planes to fetch for a format and
// (b) the DRAM line address of one plane line of one block.
//
// (a) For a target with 1 sign, r_e exponent and r_m mantissa bits the paper
// fetches 1 + (r_e+d_e) + (r_m+d_m) planes. The sign plane is always fetched.
// Mantissa: the r_m+d_m most significant mantissa planes. Exponent: when
// r_e = n_e all five exponent planes; when r_e < n_e this design fetches the
// exponent MSB and the r_e-1 exponent LSBs, which together are the rebiased
// target exponent for every value in the target's range, plus d_e of the skipped
// middle exponent planes (from the MSB side) so that out-of-range values can be
// detected and clamped. Which exponent planes are fetched is this design's choice;
// the paper only gives their number.
//
// (b) Plane-major placement: plane p of block b lives at line
// DRAM_BASE + p*NBLK + b, so each plane is one contiguous DRAM area of L bits.
// The paper says only that planes are stored independently of each other; the linear
// layout is this design's choice.
//
// Interface: purely combinational.
module bitplane_map
  import sq_pkg::*;
#(
  parameter longint unsigned L_WEIGHTS = 64'd30_000_000_000,
  parameter logic [DADDR_W-1:0] DRAM_BASE = '0
) (
  input  fmt_t                 fmt,
  input  round_cfg_t           rcfg,
  output logic [N1-1:0]        plane_mask,   // bit p set: fetch plane p
  output logic [4:0]           plane_count,
  input  logic [3:0]           plane,        // for the address
  input  logic [DADDR_W-1:0]   blk,
  output logic [DADDR_W-1:0]   line_addr
);

  localparam longint unsigned NBLK = L_WEIGHTS / 64'(BLK_W);

  fmt_desc_t d;
  int unsigned de_eff, dm_eff, nmant;

  always_comb begin
    d          = fmt_desc(fmt);
    plane_mask = '0;
    de_eff     = (int'(rcfg.de) > NE - int'(d.re)) ? NE - int'(d.re) : int'(rcfg.de);
    dm_eff     = (int'(rcfg.dm) > NM - int'(d.rm)) ? NM - int'(d.rm) : int'(rcfg.dm);
    nmant      = int'(d.rm) + dm_eff;
    if (d.nbits != 0) begin
      plane_mask[0] = 1'b1;                          // sign
      if (int'(d.re) >= NE) begin
        for (int p = 1; p <= NE; p++) plane_mask[p] = 1'b1;
      end else if (d.re != 0) begin
        plane_mask[1] = 1'b1;                        // exponent MSB
        for (int k = 0; k < NE - 1; k++)             // exponent LSBs e[re-2:0]
          if (k < int'(d.re) - 1) plane_mask[NE - k] = 1'b1;
        for (int j = 0; j < NE - 1; j++)             // middle planes e[3], e[2], ...
          if (j < de_eff) plane_mask[2 + j] = 1'b1;
      end
      for (int j = 0; j < NM; j++)                   // mantissa MSBs
        if (j < nmant) plane_mask[1 + NE + j] = 1'b1;
    end
    plane_count = 5'($countones(plane_mask));
  end

  assign line_addr = DRAM_BASE + DADDR_W'(64'(plane) * NBLK) + blk;

endmodule
