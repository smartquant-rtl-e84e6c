// quant_convert: quantization format conversion of one weight.
//
// Input is a full-precision FP16 weight (1 sign, 5 exponent, 10 mantissa bits) of
// which only the bit-planes chosen by bitplane_map were fetched; the other bits
// are ignored. Output is the weight in the target format i, right-aligned in
// N_i = 1 + r_e + r_m bits as {sign, exponent, mantissa}.
//
// With d_e = d_m = 0 the conversion is plain truncation, as in the paper: the sign,
// the r_e fetched exponent bits and the r_m top mantissa bits. With d_m > 0 the
// d_m extra mantissa bits round the result to nearest, ties to even over the
// fetched bits (the paper says only "rounding-off"). When the exponent shrinks
// (r_e < 5) the target exponent is the source exponent MSB followed by its r_e-1
// LSBs, which equals the rebiased exponent for every in-range value; with d_e > 0
// the extra middle exponent bits detect values above the target range, which
// saturate to the largest magnitude, and values below it, which flush to a signed
// zero. Formats that keep 5 exponent bits keep IEEE infinity/NaN codes, are not
// rounded when the exponent is all ones, and may round up into infinity. Values
// that land on target exponent 0 are not renormalised. All of these rules are this
// design's choices where the paper gives only the plane counts.
//
// Interface: purely combinational. The flags say whether the value was rounded
// up, saturated or flushed.
module quant_convert
  import sq_pkg::*;
(
  input  logic [N1-1:0]  w,
  input  fmt_t           fmt,
  input  round_cfg_t     rcfg,
  output logic [N1-1:0]  q,
  output logic           rounded,
  output logic           saturated,
  output logic           flushed
);

  fmt_desc_t   d;
  logic        s;
  logic [4:0]  e, et, ebit_mask;
  logic [9:0]  m, mt;
  int unsigned re, rm, de_eff, dm_eff;
  logic        ovf_det, unf_det, guard, sticky, round_up, special;
  logic [15:0] mag, maxmag;

  always_comb begin
    d   = fmt_desc(fmt);
    et        = '0;
    ebit_mask = '0;
    mt        = '0;
    re  = int'(d.re);
    rm  = int'(d.rm);
    s   = w[15];
    e   = w[14:10];
    m   = w[9:0];
    de_eff = (int'(rcfg.de) > NE - re) ? NE - re : int'(rcfg.de);
    dm_eff = (int'(rcfg.dm) > NM - rm) ? NM - rm : int'(rcfg.dm);

    // exponent
    ovf_det = 1'b0;
    unf_det = 1'b0;
    special = 1'b0;
    if (re >= NE) begin
      et      = e;
      special = (e == 5'h1f);
    end else if (re == 0) begin
      et = '0;
    end else begin
      ebit_mask = 5'((32'd1 << (re - 1)) - 1);
      et = 5'(({4'd0, e[4]} << (re - 1)) | (e & ebit_mask));
      for (int j = 0; j < NE - 1; j++) begin
        if (j < de_eff) begin
          if (e[4] && e[3 - j])   ovf_det = 1'b1;
          if (!e[4] && !e[3 - j]) unf_det = 1'b1;
        end
      end
    end

    // mantissa
    mt     = 10'(m >> (NM - rm));
    guard  = 1'b0;
    sticky = 1'b0;
    if (dm_eff >= 1) begin
      guard = m[NM - 1 - rm];
      for (int k = 1; k < NM; k++)
        if (k < dm_eff) sticky |= m[NM - 1 - rm - k];
    end
    round_up = guard && (sticky || mt[0]);

    maxmag    = 16'((32'd1 << (re + rm)) - 1);
    mag       = 16'((32'(et) << rm) | 32'(mt));
    rounded   = 1'b0;
    saturated = 1'b0;
    flushed   = 1'b0;
    if (unf_det) begin
      mag     = '0;
      flushed = 1'b1;
    end else if (ovf_det) begin
      mag       = maxmag;
      saturated = 1'b1;
    end else if (round_up && !special) begin
      if (re < NE && mag == maxmag) begin
        saturated = 1'b1;
      end else begin
        mag     = mag + 16'd1;
        rounded = 1'b1;
      end
    end

    if (d.nbits == 0) q = '0;
    else              q = 16'((32'(s) << (re + rm)) | 32'(mag));
  end

endmodule
