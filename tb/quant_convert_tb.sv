// quant_convert_tb: exhaustive check of the one-weight format converter.
//
// Every one of the 65536 FP16 codes is converted to each format (FP16, FP12, FP8,
// FP6, FP4, FP0) under every rounding setting d_e, d_m in 0..2, and compared with
// the arithmetic reference model of sq_ref_pkg. It also counts how often rounding,
// saturation and flush-to-zero occur and requires each to occur.
module quant_convert_tb;
  import sq_pkg::*;
  import sq_ref_pkg::*;

  logic [15:0] w, q, exp_q;
  fmt_t        fmt;
  round_cfg_t  rcfg;
  logic        rounded, saturated, flushed;
  int          checks = 0, failures = 0;
  int          n_round = 0, n_sat = 0, n_flush = 0;

  quant_convert dut (.w, .fmt, .rcfg, .q, .rounded, .saturated, .flushed);

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int f = 0; f < 6; f++)
      for (int de = 0; de < 3; de++)
        for (int dm = 0; dm < 3; dm++)
          for (int x = 0; x < 65536; x++) begin
            w = 16'(x); fmt = fmt_t'(f); rcfg.de = 2'(de); rcfg.dm = 2'(dm);
            #1;
            exp_q = ref_convert(w, f, de, dm);
            checks++;
            if (q !== exp_q) begin
              failures++;
              if (failures < 10)
                $display("MISMATCH w=%h fmt=%0d de=%0d dm=%0d q=%h exp=%h", w, f, de, dm, q, exp_q);
            end
            // truncation (d=0) never rounds, saturates or flushes
            if (de == 0 && dm == 0) begin
              checks++;
              if (rounded || saturated || flushed) failures++;
            end
            n_round += int'(rounded);
            n_sat   += int'(saturated);
            n_flush += int'(flushed);
          end
    // a few hand-worked values
    w = 16'h3c00; fmt = 3'd2; rcfg = '0; #1; checks++; if (q !== 16'h3c) failures++;   // 1.0 FP8
    w = 16'h3c00; fmt = 3'd3; #1; checks++; if (q !== 16'h0c) failures++;               // 1.0 FP6 = 0 011 00
    w = 16'hbe00; fmt = 3'd4; #1; checks++; if (q !== 16'hb) failures++;                // -1.5 FP4 = 1 01 1
    w = 16'h3e00; fmt = 3'd3; rcfg.dm = 2'd1; #1; checks++; if (q !== 16'h0e) failures++; // 1.5 -> 1.5
    w = 16'h3d80; fmt = 3'd4; rcfg.dm = 2'd2; #1; checks++; if (q !== 16'h3) failures++;  // 1.375 -> 1.5
    checks += 3;
    if (n_round == 0) begin failures++; $display("rounding never happened"); end
    if (n_sat   == 0) begin failures++; $display("saturation never happened"); end
    if (n_flush == 0) begin failures++; $display("flush never happened"); end
    $display("rounded=%0d saturated=%0d flushed=%0d", n_round, n_sat, n_flush);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
