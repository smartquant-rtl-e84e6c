// block_convert: builds one block of reduced-precision weights.
//
// A block is 512 weights. Its fetched bit-plane lines come in as planes[p] (bit w of
// plane p is bit 15-p of weight w). Each cycle LANES weights are reassembled from
// the planes, converted by LANES quant_convert instances and packed, N_i bits per
// weight in weight order, into the block buffer, so that the block's packed output
// is obuf[0 +: 512*N_i] and host line j of the block is obuf[512*j +: 512].
// The paper asks the controller to "construct the requested length-l chunk of
// model weights with the i-th quantization format"; the lane count, the packing
// order (weight 0 in the low bits) and the block granularity are this design's.
//
// Timing: start for one cycle (fmt and rcfg are sampled then; planes must stay
// stable until done); the conversion takes 512/LANES cycles and done pulses in the
// cycle after the last lanes are written. any_round/any_sat/any_flush report
// whether any weight of the block was rounded up, saturated or flushed.
module block_convert
  import sq_pkg::*;
#(
  parameter int unsigned LANES = 64   // weights converted per cycle, divides 512
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  fmt_t                     fmt,
  input  round_cfg_t               rcfg,
  input  logic [BLK_W-1:0]         planes [N1],
  output logic                     busy,
  output logic                     done,
  output logic [BLKBUF_BITS-1:0]   obuf,
  output logic                     any_round,
  output logic                     any_sat,
  output logic                     any_flush
);

  localparam int unsigned STEPS  = BLK_W / LANES;
  localparam int unsigned STEP_W = (STEPS > 1) ? $clog2(STEPS) : 1;

  fmt_t                fmt_r;
  round_cfg_t          rcfg_r;
  logic [STEP_W-1:0]   step;
  logic [N1-1:0]       w    [LANES];
  logic [N1-1:0]       q    [LANES];
  logic [LANES-1:0]    rnd, sat, fl;

  // Gather LANES weights of this step from the bit-planes.
  always_comb begin
    for (int l = 0; l < LANES; l++)
      for (int p = 0; p < N1; p++)
        w[l][N1 - 1 - p] = planes[p][int'(step) * LANES + l];
  end

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    quant_convert u_conv (
      .w(w[l]), .fmt(fmt_r), .rcfg(rcfg_r), .q(q[l]),
      .rounded(rnd[l]), .saturated(sat[l]), .flushed(fl[l])
    );
  end

  // Pack the lanes for each format width.
  logic [LANES*16-1:0] chunk16;
  logic [LANES*12-1:0] chunk12;
  logic [LANES*8-1:0]  chunk8;
  logic [LANES*6-1:0]  chunk6;
  logic [LANES*4-1:0]  chunk4;
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      chunk16[l*16 +: 16] = q[l][15:0];
      chunk12[l*12 +: 12] = q[l][11:0];
      chunk8 [l*8  +: 8]  = q[l][7:0];
      chunk6 [l*6  +: 6]  = q[l][5:0];
      chunk4 [l*4  +: 4]  = q[l][3:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      step      <= '0;
      fmt_r     <= '0;
      rcfg_r    <= '0;
      obuf      <= '0;
      any_round <= 1'b0;
      any_sat   <= 1'b0;
      any_flush <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy      <= 1'b1;
        step      <= '0;
        fmt_r     <= fmt;
        rcfg_r    <= rcfg;
        obuf      <= '0;
        any_round <= 1'b0;
        any_sat   <= 1'b0;
        any_flush <= 1'b0;
      end else if (busy) begin
        case (fmt_r)
          3'd0: obuf[int'(step) * LANES * 16 +: LANES * 16] <= chunk16;
          3'd1: obuf[int'(step) * LANES * 12 +: LANES * 12] <= chunk12;
          3'd2: obuf[int'(step) * LANES * 8  +: LANES * 8]  <= chunk8;
          3'd3: obuf[int'(step) * LANES * 6  +: LANES * 6]  <= chunk6;
          3'd4: obuf[int'(step) * LANES * 4  +: LANES * 4]  <= chunk4;
          default: ;
        endcase
        any_round <= any_round | (|rnd);
        any_sat   <= any_sat   | (|sat);
        any_flush <= any_flush | (|fl);
        if (int'(step) == STEPS - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        step <= step + 1'b1;
      end
    end
  end

endmodule
