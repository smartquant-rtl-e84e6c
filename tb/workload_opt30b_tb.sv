// workload_opt30b_tb: chunked mixed-precision model loading, as in the OPT-30b
// load experiments, on the controller at its default size.
//
// Ten chunks the size of an OPT-30b MLP neuron (7.2e3 weights, rounded up here
// to 14 blocks = 7168 weights) are stored in full precision. The host then loads
// them three times, for target averages of 1.6, 4.8 and 8.0 bits per weight, each
// chunk at one format (FP0 chunks are skipped, as the host would). Every returned
// line is checked against the reference, and the DRAM lines read are checked
// against 14 * sum(N_i): the bit-plane placement moves N_i/16 of the data a
// full-precision fetch would. Cycle counts and the traffic ratio are printed.
module workload_opt30b_tb;
  import sq_pkg::*;
  import sq_ref_pkg::*;

  localparam longint unsigned L    = 64'd30_000_000_000;
  localparam longint unsigned NBLK = L / 512;
  localparam int CHUNK_BLKS = 14;
  localparam int NCHUNK = 10;

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
  dram_model #(.LAT(20), .STALL_PCT(5)) mem (.clk, .rst_n, .dram_req_valid(rq_v),
    .dram_req_ready(rq_r), .dram_req(rq), .dram_rsp_valid(rs_v), .dram_rsp_data(rs_d));

  assign hs_r = 1'b1;

  logic [15:0] wref [longint unsigned];

  function automatic longint unsigned region_base(int f);
    longint unsigned c = 0;
    for (int j = 0; j < f; j++) c += longint'(ref_nbits(j));
    return NBLK * c;
  endfunction

  task automatic do_req(host_op_e op, longint unsigned line, logic [LINE_BITS-1:0] wd, output host_rsp_t r);
    @(negedge clk);
    hq_v = 1; hq.op = op; hq.addr = ADDR_W'(line << 6); hq.tag = '0; hq.wdata = wd;
    @(posedge clk);
    while (!hq_r) @(posedge clk);
    @(negedge clk); hq_v = 0;
    while (!hs_v) @(negedge clk);
    r = hs;
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // chunk formats per target bits/weight (index = format, 5 = FP0)
  int mix [3][NCHUNK] = '{
    '{0, 5, 5, 5, 5, 5, 5, 5, 5, 5},      // 16 / 10 = 1.6
    '{0, 1, 2, 2, 4, 5, 5, 5, 5, 5},      // 48 / 10 = 4.8
    '{0, 0, 1, 1, 2, 2, 4, 4, 5, 5}};     // 80 / 10 = 8.0
  string tname [3] = '{"1.6", "4.8", "8.0"};

  initial begin
    host_rsp_t r;
    longint unsigned base_blk;
    base_blk = 40_000_000;   // somewhere inside the model
    hq_v = 0; hq = '0;
    for (int i = 0; i < NFMT; i++) rcfg[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // store the chunks in full precision (weights of a trained model are small:
    // exponents kept near 1.0 so that reduced formats are in range)
    for (int c = 0; c < NCHUNK; c++)
      for (int b = 0; b < CHUNK_BLKS; b++)
        for (int s = 0; s < 16; s++) begin
          logic [LINE_BITS-1:0] d;
          longint unsigned blk;
          blk = base_blk + longint'(c * CHUNK_BLKS + b);
          for (int k = 0; k < 32; k++) begin
            logic [15:0] x;
            x = {1'($urandom), 5'(12 + $urandom_range(4)), 10'($urandom)};
            d[k*16 +: 16] = x;
            wref[blk * 512 + longint'(s * 32 + k)] = x;
          end
          do_req(HOST_WR, blk * 16 + longint'(s), d, r);
          checks++; if (r.err) failures++;
        end
    for (int t = 0; t < 3; t++) begin
      int sum_n, nonzero, t0;
      logic [31:0] rd0;
      sum_n = 0; nonzero = 0; rd0 = st_rd;
      t0 = $time / 10;
      for (int c = 0; c < NCHUNK; c++) begin
        int f, n;
        f = mix[t][c];
        n = ref_nbits(f);
        sum_n += n;
        if (n == 0) continue;        // FP0: the host skips the chunk
        nonzero++;
        for (int b = 0; b < CHUNK_BLKS; b++) begin
          longint unsigned blk;
          logic [BLKBUF_BITS-1:0] e;
          blk = base_blk + longint'(c * CHUNK_BLKS + b);
          e = '0;
          for (int w = 0; w < 512; w++)
            e[w * n +: 16] = e[w * n +: 16] | ref_convert(wref[blk * 512 + longint'(w)], f, 0, 0);
          for (int j = 0; j < n; j++) begin
            do_req(HOST_RD, region_base(f) + blk * longint'(n) + longint'(j), '0, r);
            checks++;
            if (r.err || r.rdata !== e[j * 512 +: 512]) begin
              failures++;
              if (failures < 10) $display("mismatch chunk %0d blk %0d line %0d", c, b, j);
            end
          end
        end
      end
      checks++;
      if (st_rd - rd0 != 32'(CHUNK_BLKS * sum_n)) begin
        failures++; $display("DRAM lines %0d, expected %0d", st_rd - rd0, CHUNK_BLKS * sum_n);
      end
      $display("target %s bits/weight: avg %0d/10 bits, DRAM lines %0d vs %0d for full-precision fetch (%0d%%), %0d cycles",
               tname[t], sum_n, st_rd - rd0, CHUNK_BLKS * 16 * nonzero,
               100 * int'(st_rd - rd0) / (CHUNK_BLKS * 16 * nonzero), $time / 10 - t0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
