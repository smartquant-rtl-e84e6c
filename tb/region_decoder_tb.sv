// region_decoder_tb: checks the bloated logical address map.
//
// Two instances: the default model size (L = 30e9 weights) and a small one
// (L = 2048, 4 blocks). For random and boundary line addresses the expected region,
// block and line-in-block are worked out by walking the regions P_1..P_6 with
// sizes L*N_i bits (FP16, FP12, FP8, FP6, FP4, FP0) laid end to end; addresses past
// the last region must miss. Region boundaries are always checked on both sides.
module region_decoder_tb;
  import sq_pkg::*;
  import sq_ref_pkg::*;

  localparam longint unsigned LBIG = 64'd30_000_000_000;
  localparam longint unsigned LSML = 64'd2048;
  logic [LADDR_W-1:0] la_b, la_s;
  logic               hit_b, hit_s;
  fmt_t               fmt_b, fmt_s;
  logic [DADDR_W-1:0] blk_b, blk_s;
  logic [SUB_W-1:0]   sub_b, sub_s;
  int checks = 0, failures = 0;

  region_decoder #(.L_WEIGHTS(LBIG)) dut_b (.line_addr(la_b), .hit(hit_b), .fmt(fmt_b), .blk(blk_b), .sub(sub_b));
  region_decoder #(.L_WEIGHTS(LSML)) dut_s (.line_addr(la_s), .hit(hit_s), .fmt(fmt_s), .blk(blk_s), .sub(sub_s));

  // expected decode by walking regions (line = 512 bits)
  task automatic expect_dec(longint unsigned L, longint unsigned line,
                            output bit h, output int f, output longint unsigned b, output int s);
    longint unsigned base = 0;
    h = 0; f = 0; b = 0; s = 0;
    for (int i = 0; i < 6; i++) begin
      longint unsigned sz = L * longint'(ref_nbits(i)) / 512;
      if (line >= base && line < base + sz) begin
        longint unsigned bitoff = (line - base) * 512;
        h = 1; f = i;
        b = bitoff / (512 * longint'(ref_nbits(i)));
        s = int'((bitoff % (512 * longint'(ref_nbits(i)))) / 512);
      end
      base += sz;
    end
  endtask

  task automatic check(bit big, longint unsigned line);
    bit h; int f; longint unsigned b; int s;
    expect_dec(big ? LBIG : LSML, line, h, f, b, s);
    if (big) la_b = LADDR_W'(line); else la_s = LADDR_W'(line);
    #1;
    checks++;
    if (big ? (hit_b != h || (h && (int'(fmt_b) != f || blk_b != DADDR_W'(b) || int'(sub_b) != s)))
            : (hit_s != h || (h && (int'(fmt_s) != f || blk_s != DADDR_W'(b) || int'(sub_s) != s)))) begin
      failures++;
      if (failures < 10) $display("line %0d big=%0d: exp h=%0d f=%0d b=%0d s=%0d", line, big, h, f, b, s);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    la_b = '0; la_s = '0;
    // every line of the small space, and some beyond
    for (longint unsigned l = 0; l < LSML * 46 / 512 + 8; l++) check(0, l);
    // region boundaries of the big space
    begin
      longint unsigned base = 0;
      for (int i = 0; i < 6; i++) begin
        base += LBIG * longint'(ref_nbits(i)) / 512;
        check(1, base - 1); check(1, base); check(1, base + 1);
      end
    end
    for (int i = 0; i < 2000; i++)
      check(1, ({$urandom, $urandom} % (LBIG * 47 / 512)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
