// plane_fetch_tb: fetches the planes of blocks from the DRAM model.
//
// The DRAM model is preloaded with random plane lines for a 4-block model. For
// every format and rounding setting and each block, the fetch must read exactly
// the reference plane set (counted at the DRAM model), return each fetched plane
// line unchanged in planes[p], leave the others zero, and, with an always-ready
// DRAM of latency LAT, finish P + LAT + 2 cycles after start for P planes.
// A second pass runs with a DRAM that stalls 30% of the time.
module plane_fetch_tb;
  import sq_pkg::*;
  import sq_ref_pkg::*;

  localparam longint unsigned L = 64'd2048;
  localparam int LAT = 8;
  localparam longint unsigned NBLK = L / 512;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic               start, busy, done;
  fmt_t               fmt;
  round_cfg_t         rcfg;
  logic [DADDR_W-1:0] blk;
  logic [4:0]         nlines;
  logic [BLK_W-1:0]   planes [N1];
  logic               rq_v, rq_r, rs_v;
  dram_req_t          rq;
  logic [LINE_BITS-1:0] rs_d;
  logic               stall;

  plane_fetch #(.L_WEIGHTS(L)) dut (.clk, .rst_n, .start, .fmt, .rcfg, .blk, .busy, .done,
    .lines_fetched(nlines), .planes, .dram_req_valid(rq_v), .dram_req_ready(rq_r), .dram_req(rq),
    .dram_rsp_valid(rs_v), .dram_rsp_data(rs_d));

  // two DRAM models: one never stalls, one stalls; stall selects which one drives
  logic r0, r1, v0, v1;
  logic [LINE_BITS-1:0] d0, d1;
  dram_model #(.LAT(LAT), .STALL_PCT(0))  m0 (.clk, .rst_n, .dram_req_valid(rq_v && !stall),
    .dram_req_ready(r0), .dram_req(rq), .dram_rsp_valid(v0), .dram_rsp_data(d0));
  dram_model #(.LAT(LAT), .STALL_PCT(30)) m1 (.clk, .rst_n, .dram_req_valid(rq_v && stall),
    .dram_req_ready(r1), .dram_req(rq), .dram_rsp_valid(v1), .dram_rsp_data(d1));
  assign rq_r = stall ? r1 : r0;
  assign rs_v = stall ? v1 : v0;
  assign rs_d = stall ? d1 : d0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [LINE_BITS-1:0] ln;
    start = 0; fmt = '0; rcfg = '0; blk = '0; stall = 0;
    for (longint a = 0; a < 16 * NBLK; a++) begin
      for (int k = 0; k < 16; k++) ln[k*32 +: 32] = $urandom;
      m0.poke(DADDR_W'(a), ln);
      m1.poke(DADDR_W'(a), ln);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int pass = 0; pass < 2; pass++)
      for (int f = 0; f < 6; f++)
        for (int de = 0; de < 3; de++)
          for (int dm = 0; dm < 3; dm++)
            for (int b = 0; b < int'(NBLK); b++) begin
              int t0, nrd0, lat;
              logic [15:0] msk;
              @(negedge clk);
              stall = (pass == 1);
              fmt = fmt_t'(f); rcfg.de = 2'(de); rcfg.dm = 2'(dm); blk = DADDR_W'(b);
              msk = ref_planes(f, de, dm);
              nrd0 = stall ? m1.n_rd : m0.n_rd;
              start = 1;
              @(posedge clk); t0 = $time / 10;
              @(negedge clk); start = 0;
              while (!done) @(negedge clk);
              lat = $time / 10 - t0;
              checks++;
              if ((stall ? m1.n_rd : m0.n_rd) - nrd0 != $countones(msk)) begin
                failures++; $display("read count fmt %0d: %0d", f, (stall ? m1.n_rd : m0.n_rd) - nrd0);
              end
              checks++;
              if (int'(nlines) != $countones(msk)) failures++;
              if (!stall) begin
                checks++;
                if (lat != $countones(msk) + LAT + 2 && msk != 0) begin
                  failures++; $display("latency fmt %0d planes %0d: %0d", f, $countones(msk), lat);
                end
              end
              for (int p = 0; p < 16; p++) begin
                checks++;
                if (planes[p] !== (msk[p] ? m0.peek(DADDR_W'(longint'(p) * NBLK + b)) : '0)) begin
                  failures++;
                  if (failures < 10) $display("plane %0d fmt %0d blk %0d wrong", p, f, b);
                end
              end
            end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
