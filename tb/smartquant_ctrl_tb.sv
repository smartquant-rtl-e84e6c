// smartquant_ctrl_tb: end-to-end test of the SmartQuant controller at its default
// size (a 30e9-weight model, 64 conversion lanes), behind a sparse DRAM model.
//
// The host loads full-precision weights into region P_1 for blocks at the start,
// in the middle and at the very end of the model, then reads every block back from
// every region (FP16, FP12, FP8, FP6, FP4) with truncation and with rounding planes,
// and compares each returned line with lines packed from the sq_ref_pkg reference.
// It checks that a block read at N_i bits costs exactly the reference number of
// plane lines in DRAM (N_i with truncation), the cycle count of a miss and a hit,
// and the error responses. It counts each mechanism of the design and fails if one
// never happens: block-buffer hit and miss, full and partial write flush, flush
// before a read, buffer invalidation by a write, refetch on a rounding-setting
// change, rounding, saturation, flush to zero, error response, host back-pressure.
module smartquant_ctrl_tb;
  import sq_pkg::*;
  import sq_ref_pkg::*;

  localparam longint unsigned L    = 64'd30_000_000_000;   // the controller's default
  localparam longint unsigned NBLK = L / 512;
  localparam int LAT = 20;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                 hq_v, hq_r, hs_v, hs_r;
  host_req_t            hq;
  host_rsp_t            hs;
  round_cfg_t           rcfg [NFMT];
  logic                 rq_v, rq_r, rs_v;
  dram_req_t            rq;
  logic [LINE_BITS-1:0] rs_d;
  logic [31:0]          st_rd, st_wr, st_hrd, st_hit;

  smartquant_ctrl dut (.clk, .rst_n, .host_req_valid(hq_v), .host_req_ready(hq_r), .host_req(hq),
    .host_rsp_valid(hs_v), .host_rsp_ready(hs_r), .host_rsp(hs), .rcfg,
    .dram_req_valid(rq_v), .dram_req_ready(rq_r), .dram_req(rq),
    .dram_rsp_valid(rs_v), .dram_rsp_data(rs_d),
    .stat_dram_rd_lines(st_rd), .stat_dram_wr_lines(st_wr), .stat_host_rd(st_hrd), .stat_buf_hit(st_hit));
  dram_model #(.LAT(LAT), .STALL_PCT(0)) mem (.clk, .rst_n, .dram_req_valid(rq_v),
    .dram_req_ready(rq_r), .dram_req(rq), .dram_rsp_valid(rs_v), .dram_rsp_data(rs_d));

  // mechanism counters
  int n_hit, n_miss, n_ffull, n_fpart, n_flush_rd, n_inval, n_cfg, n_round, n_sat, n_fz, n_err, n_bp;
  always @(posedge clk) if (rst_n) begin
    n_ffull += int'(dut.u_wr.flush_full);
    n_fpart += int'(dut.u_wr.flush_part);
    if (dut.u_conv.done) begin
      n_round += int'(dut.u_conv.any_round);
      n_sat   += int'(dut.u_conv.any_sat);
      n_fz    += int'(dut.u_conv.any_flush);
    end
    if (dut.flush_req && dut.wr_pending && !dut.wr_flushing) n_flush_rd++;
    if (hs_v && !hs_r) n_bp++;
  end

  // reference model of the stored weights (unwritten weights are zero in DRAM)
  logic [15:0] wref [longint unsigned];
  function automatic logic [15:0] wget(longint unsigned b, int w);
    longint unsigned k = b * 512 + longint'(w);
    return wref.exists(k) ? wref[k] : 16'h0;
  endfunction

  function automatic longint unsigned region_base(int f);
    longint unsigned c = 0;
    for (int j = 0; j < f; j++) c += longint'(ref_nbits(j));
    return NBLK * c;
  endfunction

  int tag = 0;
  bit bp_en = 0;
  bit lat_chk = 1;   // off for a read that must first flush a write
  always @(posedge clk) hs_r <= bp_en ? ($urandom_range(3) != 0) : 1'b1;

  task automatic do_req(host_op_e op, longint unsigned line, logic [LINE_BITS-1:0] wd,
                        output host_rsp_t r, output int lat);
    int t0;
    @(negedge clk);
    hq_v = 1; hq.op = op; hq.addr = ADDR_W'(line << 6); hq.tag = 12'(tag++); hq.wdata = wd;
    @(posedge clk);
    while (!hq_r) @(posedge clk);
    t0 = $time / 10;
    @(negedge clk); hq_v = 0;
    while (!hs_v) @(negedge clk);
    lat = $time / 10 - t0;
    while (!(hs_v && hs_r)) @(negedge clk);
    r = hs;
    checks++;
    if (r.tag != 12'(tag - 1) || r.op != op) begin failures++; $display("tag/op mismatch"); end
  endtask

  task automatic write_line(longint unsigned b, int s);
    logic [LINE_BITS-1:0] d;
    host_rsp_t r; int lat;
    for (int k = 0; k < 32; k++) begin
      d[k*16 +: 16] = 16'($urandom);
      wref[b * 512 + longint'(s * 32 + k)] = d[k*16 +: 16];
    end
    do_req(HOST_WR, b * 16 + longint'(s), d, r, lat);
    checks++;
    if (r.err) begin failures++; $display("write error"); end
  endtask

  // read block b in format f, all N_i lines in order, and compare
  task automatic read_block(longint unsigned b, int f, int de, int dm, bit expect_miss);
    int n = ref_nbits(f);
    logic [BLKBUF_BITS-1:0] exp_buf;
    logic [31:0] rd0, hit0;
    host_rsp_t r; int lat;
    exp_buf = '0;
    for (int w = 0; w < 512; w++)
      exp_buf[w * n +: 16] = exp_buf[w * n +: 16] | (ref_convert(wget(b, w), f, de, dm) & 16'((1 << n) - 1));
    rcfg[f].de = 2'(de); rcfg[f].dm = 2'(dm);
    rd0 = st_rd; hit0 = st_hit;
    for (int j = 0; j < n; j++) begin
      do_req(HOST_RD, region_base(f) + b * longint'(n) + longint'(j), '0, r, lat);
      checks++;
      if (r.err || r.rdata !== exp_buf[j * 512 +: 512]) begin
        failures++;
        if (failures < 10) $display("data mismatch blk %0d fmt %0d de %0d dm %0d line %0d", b, f, de, dm, j);
      end
      if (j == 0 && !bp_en && lat_chk) begin
        // cycle counts of this design: miss = P + LAT + 2 (fetch) + 512/64 (convert) + 5
        checks++;
        if (expect_miss && lat != $countones(ref_planes(f, de, dm)) + LAT + 2 + 8 + 5) begin
          failures++; $display("miss latency %0d (fmt %0d)", lat, f);
        end
      end
      if (j == 1 && !bp_en) begin
        checks++;
        if (lat != 2) begin failures++; $display("hit latency %0d", lat); end
      end
    end
    // proportional DRAM traffic: one fetch of the reference plane set
    checks += 2;
    if (expect_miss && st_rd - rd0 != 32'($countones(ref_planes(f, de, dm)))) begin
      failures++; $display("DRAM lines read %0d for fmt %0d", st_rd - rd0, f);
    end
    if (st_hit - hit0 != 32'(expect_miss ? n - 1 : n)) begin
      failures++; $display("hits %0d", st_hit - hit0);
    end
    n_hit  += int'(st_hit - hit0);
    n_miss += int'(expect_miss);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned blks[4] = '{0, 1, 12345678, NBLK - 1};
    host_rsp_t r; int lat;
    logic [31:0] rd0;
    n_hit = 0; n_miss = 0; n_ffull = 0; n_fpart = 0; n_flush_rd = 0; n_inval = 0; n_cfg = 0;
    n_round = 0; n_sat = 0; n_fz = 0; n_err = 0; n_bp = 0;
    hq_v = 0; hq = '0;
    for (int i = 0; i < NFMT; i++) rcfg[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // load: full blocks 0, 12345678 and the last; block 1 only half, closed by
    // the write to the next block
    for (int s = 0; s < 16; s++) write_line(blks[0], s);
    for (int s = 0; s < 8; s++)  write_line(blks[1], s);
    for (int s = 0; s < 16; s++) write_line(blks[2], s);
    for (int s = 0; s < 16; s++) write_line(blks[3], s);
    repeat (40) @(posedge clk);
    checks++;
    if (st_wr != 64) begin failures++; $display("DRAM line writes %0d", st_wr); end

    // read every block in every format, truncation then rounding
    foreach (blks[i])
      for (int f = 0; f < 5; f++) begin
        read_block(blks[i], f, 0, 0, 1);
        read_block(blks[i], f, 2, 2, 1);      // setting change: refetch
        n_cfg++;
      end
    // the same block again in the same format: served from the buffer
    read_block(blks[3], 4, 2, 2, 0);

    // a write to the buffered block invalidates it; the read flushes the write first
    write_line(blks[3], 5);
    n_inval += int'(!dut.rb_valid);
    lat_chk = 0;
    read_block(blks[3], 4, 2, 2, 1);
    lat_chk = 1;
    read_block(blks[3], 0, 0, 0, 1);

    // errors: past the end of the logical space, and a write to a reduced region;
    // neither may touch DRAM
    rd0 = st_rd;
    do_req(HOST_RD, region_base(5), '0, r, lat);
    checks++; if (!r.err) failures++; else n_err++;
    do_req(HOST_WR, region_base(2) + 3, '0, r, lat);
    checks++; if (!r.err) failures++; else n_err++;
    checks++; if (st_rd != rd0) failures++;

    // host back-pressure on responses
    bp_en = 1;
    read_block(blks[2], 1, 1, 1, 1);
    read_block(blks[0], 3, 0, 1, 1);
    bp_en = 0;

    $display("hit=%0d miss=%0d flush_full=%0d flush_part=%0d flush_before_read=%0d invalidate=%0d cfg_change=%0d",
             n_hit, n_miss, n_ffull, n_fpart, n_flush_rd, n_inval, n_cfg);
    $display("round=%0d saturate=%0d flush_zero=%0d err=%0d backpressure=%0d dram_rd=%0d dram_wr=%0d",
             n_round, n_sat, n_fz, n_err, n_bp, st_rd, st_wr);
    if (n_hit == 0)      begin failures++; $display("no buffer hit"); end
    if (n_miss == 0)     begin failures++; $display("no buffer miss"); end
    if (n_ffull == 0)    begin failures++; $display("no full flush"); end
    if (n_fpart == 0)    begin failures++; $display("no partial flush"); end
    if (n_flush_rd == 0) begin failures++; $display("no flush before read"); end
    if (n_inval == 0)    begin failures++; $display("no invalidation"); end
    if (n_cfg == 0)      begin failures++; $display("no setting change"); end
    if (n_round == 0)    begin failures++; $display("no rounding"); end
    if (n_sat == 0)      begin failures++; $display("no saturation"); end
    if (n_fz == 0)       begin failures++; $display("no flush to zero"); end
    if (n_err == 0)      begin failures++; $display("no error response"); end
    if (n_bp == 0)       begin failures++; $display("no back-pressure"); end
    checks += 12;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
