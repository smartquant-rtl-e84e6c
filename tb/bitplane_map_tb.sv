// bitplane_map_tb: checks plane selection and plane placement addresses.
//
// For every format and every d_e, d_m in 0..2 the selected plane set must equal
// the reference set of sq_ref_pkg and hold 1+min(r_e+d_e,5)+min(r_m+d_m,10) planes
// (none for FP0), the count the paper gives. Line addresses are checked against
// DRAM_BASE + p*(L/512) + b for random planes and blocks at the default L.
module bitplane_map_tb;
  import sq_pkg::*;
  import sq_ref_pkg::*;

  localparam longint unsigned L = 64'd30_000_000_000;
  fmt_t               fmt;
  round_cfg_t         rcfg;
  logic [15:0]        mask;
  logic [4:0]         cnt;
  logic [3:0]         plane;
  logic [DADDR_W-1:0] blk, addr;
  int checks = 0, failures = 0;

  bitplane_map #(.L_WEIGHTS(L), .DRAM_BASE(40'h100)) dut (
    .fmt, .rcfg, .plane_mask(mask), .plane_count(cnt), .plane, .blk, .line_addr(addr));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    plane = '0; blk = '0;
    for (int f = 0; f < 6; f++)
      for (int de = 0; de < 3; de++)
        for (int dm = 0; dm < 3; dm++) begin
          int n;
          fmt = fmt_t'(f); rcfg.de = 2'(de); rcfg.dm = 2'(dm);
          #1;
          n = (f == 5) ? 0 : 1 + imin(ref_re(f) + de, 5) + imin(ref_rm(f) + dm, 10);
          if (ref_re(f) == 5) n = (f == 5) ? 0 : 1 + 5 + imin(ref_rm(f) + dm, 10);
          checks += 2;
          if (mask !== ref_planes(f, de, dm)) begin
            failures++;
            $display("mask fmt=%0d de=%0d dm=%0d got %b exp %b", f, de, dm, mask, ref_planes(f, de, dm));
          end
          if (int'(cnt) != n) begin
            failures++;
            $display("count fmt=%0d de=%0d dm=%0d got %0d exp %0d", f, de, dm, cnt, n);
          end
        end
    // truncation plane counts are exactly N_i
    rcfg = '0;
    for (int f = 0; f < 6; f++) begin
      fmt = fmt_t'(f); #1; checks++;
      if (int'(cnt) != ref_nbits(f)) failures++;
    end
    for (int i = 0; i < 200; i++) begin
      longint unsigned b = {$urandom, $urandom} % (L / 512);
      plane = 4'($urandom_range(15));
      blk   = DADDR_W'(b);
      #1; checks++;
      if (addr !== DADDR_W'(64'h100 + 64'(plane) * (L / 512) + b)) begin
        failures++;
        $display("addr plane=%0d blk=%0d got %0d", plane, b, addr);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
