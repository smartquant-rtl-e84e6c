// sq_ref_pkg: reference models used by the SmartQuant testbenches.
//
// ref_convert() computes the expected reduced-precision weight arithmetically:
// it first rebuilds the "visible" FP16 value from the bit-planes that a read of the
// format fetches (unfetched middle exponent bits are taken as the in-range value,
// unfetched mantissa bits as zero), then rebiases the exponent as an integer,
// saturates above and flushes below the target range, and rounds the mantissa to
// nearest-even by comparing the remainder with one half. It shares no code with
// the RTL converter. ref_planes() lists the fetched planes by counting.
package sq_ref_pkg;

  function automatic int ref_re(int f);
    int t[6] = '{5, 5, 5, 3, 2, 0};
    return t[f];
  endfunction
  function automatic int ref_rm(int f);
    int t[6] = '{10, 6, 2, 2, 1, 0};
    return t[f];
  endfunction
  function automatic int ref_nbits(int f);
    return (f == 5) ? 0 : 1 + ref_re(f) + ref_rm(f);
  endfunction
  function automatic int imin(int a, int b);
    return (a < b) ? a : b;
  endfunction

  // Bit p of the result: plane p (bit 15-p of the weight) is fetched.
  function automatic logic [15:0] ref_planes(int f, int de, int dm);
    logic [15:0] r = '0;
    int re = ref_re(f), rm = ref_rm(f);
    int nmid;
    if (f == 5) return r;
    r[0] = 1'b1;
    if (re == 5) begin
      for (int b = 10; b <= 14; b++) r[15 - b] = 1'b1;
    end else begin
      r[15 - 14] = 1'b1;                               // e[4]
      for (int b = 10; b < 10 + re - 1; b++) r[15 - b] = 1'b1;  // low exponent bits
      nmid = imin(de, 5 - re);
      for (int k = 0; k < nmid; k++) r[15 - (13 - k)] = 1'b1;   // e[3], e[2], ...
    end
    for (int k = 0; k < imin(rm + dm, 10); k++) r[15 - (9 - k)] = 1'b1;
    return r;
  endfunction

  function automatic logic [15:0] ref_convert(logic [15:0] w, int f, int de, int dm);
    int re = ref_re(f), rm = ref_rm(f);
    int s, e, m, ev, mv, bias_t, et, emax, kept, rem, half, mag, magmax;
    logic [15:0] pl;
    bit up;
    if (f == 5) return 16'h0;
    pl = ref_planes(f, de, dm);
    s  = w[15];
    e  = w[14:10];
    m  = w[9:0];
    // visible exponent: unfetched middle bits take the in-range value ~MSB
    ev = 0;
    for (int b = 0; b < 5; b++) begin
      int bit_v = (e >> b) & 1;
      if (!pl[15 - (10 + b)]) bit_v = (b == 4) ? bit_v : ((e >> 4) & 1) ^ 1;
      ev |= bit_v << b;
    end
    mv = 0;
    for (int b = 0; b < 10; b++) if (pl[15 - b]) mv |= ((m >> b) & 1) << b;
    magmax = (1 << (re + rm)) - 1;
    kept = mv >> (10 - rm);
    rem  = mv & ((1 << (10 - rm)) - 1);
    half = 1 << (9 - rm);
    up   = (rm < 10) && ((rem > half) || (rem == half && (kept & 1)));
    if (re == 5) begin
      mag = (e << rm) | kept;
      if (up && e != 31) mag = mag + 1;
    end else begin
      bias_t = (1 << (re - 1)) - 1;
      et   = ev - 15 + bias_t;
      emax = (1 << re) - 1;
      if (et < 0)          mag = 0;
      else if (et > emax)  mag = magmax;
      else begin
        mag = (et << rm) | kept;
        if (up) mag = (mag == magmax) ? magmax : mag + 1;
      end
    end
    return 16'((s << (re + rm)) | mag);
  endfunction

endpackage
