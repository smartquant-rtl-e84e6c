// block_convert_tb: converts random 512-weight blocks held as bit-planes.
//
// For each format and several rounding settings it loads random plane lines,
// pulses start and checks that done arrives exactly 512/LANES cycles later, that
// the packed buffer holds weight w's converted value (sq_ref_pkg model) at bits
// [w*N_i +: N_i], and that the bits above 512*N_i are zero. Run at the default
// LANES and at LANES = 16.
module block_convert_tb;
  import sq_pkg::*;
  import sq_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  fmt_t                   fmt;
  round_cfg_t             rcfg;
  logic                   start;
  logic [BLK_W-1:0]       planes [N1];
  logic                   busy_a, done_a, r_a, s_a, f_a;
  logic                   busy_b, done_b, r_b, s_b, f_b;
  logic [BLKBUF_BITS-1:0] obuf_a, obuf_b;

  block_convert dut_a (.clk, .rst_n, .start, .fmt, .rcfg, .planes, .busy(busy_a), .done(done_a),
    .obuf(obuf_a), .any_round(r_a), .any_sat(s_a), .any_flush(f_a));
  block_convert #(.LANES(16)) dut_b (.clk, .rst_n, .start, .fmt, .rcfg, .planes, .busy(busy_b),
    .done(done_b), .obuf(obuf_b), .any_round(r_b), .any_sat(s_b), .any_flush(f_b));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_buf(logic [BLKBUF_BITS-1:0] ob, int f, int de, int dm);
    int n = ref_nbits(f);
    for (int w = 0; w < 512; w++) begin
      logic [15:0] word, e;
      for (int p = 0; p < 16; p++) word[15 - p] = planes[p][w];
      e = ref_convert(word, f, de, dm);
      checks++;
      if (n > 0 && (ob[w * n +: 16] & 16'((1 << n) - 1)) != e) begin
        failures++;
        if (failures < 10) $display("fmt %0d w %0d got %h exp %h", f, w, ob[w*n +: 16], e);
      end
    end
    checks++;
    if ((ob >> (512 * n)) != '0) failures++;
  endtask

  initial begin
    int t0, ta, tb;
    start = 0; fmt = '0; rcfg = '0;
    for (int p = 0; p < N1; p++) planes[p] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 6; f++)
      for (int cfg = 0; cfg < 4; cfg++) begin
        int de = (cfg == 1 || cfg == 3) ? 2 : (cfg == 2 ? 1 : 0);
        int dm = (cfg >= 2) ? cfg - 1 : 0;
        @(negedge clk);
        for (int p = 0; p < N1; p++)
          for (int k = 0; k < BLK_W / 32; k++) planes[p][k*32 +: 32] = $urandom;
        fmt = fmt_t'(f); rcfg.de = 2'(de); rcfg.dm = 2'(dm);
        start = 1;
        @(posedge clk); t0 = $time / 10;
        @(negedge clk); start = 0;
        ta = -1; tb = -1;
        while (ta < 0 || tb < 0) begin
          @(posedge clk); #1;
          if (done_a && ta < 0) ta = $time / 10 - t0;
          if (done_b && tb < 0) tb = $time / 10 - t0;
        end
        checks += 2;
        if (ta != 512 / 64) begin failures++; $display("latency LANES=64: %0d", ta); end
        if (tb != 512 / 16) begin failures++; $display("latency LANES=16: %0d", tb); end
        check_buf(obuf_a, f, de, dm);
        check_buf(obuf_b, f, de, dm);
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
