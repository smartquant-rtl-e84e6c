// smartquant_ctrl: SmartQuant CXL memory controller datapath (top).
//
// The device stores one full-precision (FP16) copy of an AI model in DRAM, split
// into 16 bit-planes, and shows the host a bloated logical space with one region
// per quantization format (FP16, FP12, FP8, FP6, FP4; FP0 chunks are skipped by the
// host and take no space). The host picks the precision of each chunk of weights
// simply by reading it from the matching region; the controller fetches only the
// bit-planes that format needs and converts on the fly, so DRAM traffic shrinks
// with the precision. Region layout, plane selection and truncation/rounding follow
// the paper; the block buffer, the write path and all interfaces are this design's.
//
// Operation, one host request at a time:
//  * Read: region_decoder gives (format, 512-weight block, line in block). If the
//    block buffer holds that block in that format (and with the same rounding
//    setting), the line is returned from it (a buffer hit). Otherwise plane_fetch
//    reads the needed plane lines, block_convert builds the block's N_i packed
//    lines in the buffer, and the line is returned. A sequential chunk read thus
//    costs one DRAM line per host line. Pending writes are flushed first.
//  * Write: only region P_1 (full precision) is writable; lines go to
//    placement_writer, which stores them as bit-planes. A write invalidates the
//    block buffer if it holds the same block.
//  * An address outside every region, or a write outside P_1, gets a response
//    with err set.
//
// Interfaces: host_req valid/ready (simplified CXL.mem M2S request with data),
// host_rsp valid/ready (S2M data or completion), DRAM line port as in plane_fetch,
// rcfg[i] = d_e/d_m rounding planes of region i (sampled per block conversion).
// Counters count DRAM line reads/writes, host reads and block-buffer hits.
// Latency of a missing read: 1 decode cycle + plane fetch (plane count + DRAM
// latency) + 512/LANES conversion cycles + 1 response cycle.
module smartquant_ctrl
  import sq_pkg::*;
#(
  parameter longint unsigned L_WEIGHTS = 64'd30_000_000_000,   // L, weights in the model
  parameter int unsigned     LANES     = 64                      // conversion lanes
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // host
  input  logic                  host_req_valid,
  output logic                  host_req_ready,
  input  host_req_t             host_req,
  output logic                  host_rsp_valid,
  input  logic                  host_rsp_ready,
  output host_rsp_t             host_rsp,
  // configuration
  input  round_cfg_t            rcfg [NFMT],
  // DRAM
  output logic                  dram_req_valid,
  input  logic                  dram_req_ready,
  output dram_req_t             dram_req,
  input  logic                  dram_rsp_valid,
  input  logic [LINE_BITS-1:0]  dram_rsp_data,
  // statistics
  output logic [31:0]           stat_dram_rd_lines,
  output logic [31:0]           stat_dram_wr_lines,
  output logic [31:0]           stat_host_rd,
  output logic [31:0]           stat_buf_hit
);

  typedef enum logic [2:0] { S_IDLE, S_EXEC, S_FETCH, S_CONV, S_RESP } state_e;
  state_e state;

  host_req_t           req_r;
  logic                dec_hit;
  fmt_t                dec_fmt;
  logic [DADDR_W-1:0]  dec_blk;
  logic [SUB_W-1:0]    dec_sub;

  region_decoder #(.L_WEIGHTS(L_WEIGHTS)) u_dec (
    .line_addr(req_r.addr[ADDR_W-1:6]), .hit(dec_hit), .fmt(dec_fmt),
    .blk(dec_blk), .sub(dec_sub)
  );

  // block buffer tags
  logic                rb_valid;
  fmt_t                rb_fmt;
  logic [DADDR_W-1:0]  rb_blk;
  round_cfg_t          rb_cfg;
  round_cfg_t          cur_cfg, cfg_r;
  logic                rb_hit, miss_r;
  assign cur_cfg = rcfg[dec_fmt];
  assign rb_hit  = rb_valid && rb_fmt == dec_fmt && rb_blk == dec_blk && rb_cfg == cur_cfg;

  // plane fetch
  logic                 pf_start, pf_busy, pf_done;
  logic [4:0]           pf_lines;
  logic [BLK_W-1:0]     planes [N1];
  logic                 pf_req_valid, pf_req_ready;
  dram_req_t            pf_req;

  plane_fetch #(.L_WEIGHTS(L_WEIGHTS)) u_fetch (
    .clk, .rst_n, .start(pf_start), .fmt(dec_fmt), .rcfg(cur_cfg), .blk(dec_blk),
    .busy(pf_busy), .done(pf_done), .lines_fetched(pf_lines), .planes(planes),
    .dram_req_valid(pf_req_valid), .dram_req_ready(pf_req_ready), .dram_req(pf_req),
    .dram_rsp_valid, .dram_rsp_data
  );

  // conversion
  logic                    cv_start, cv_busy, cv_done, cv_round, cv_sat, cv_flush;
  logic [BLKBUF_BITS-1:0]  obuf;

  block_convert #(.LANES(LANES)) u_conv (
    .clk, .rst_n, .start(cv_start), .fmt(dec_fmt), .rcfg(cfg_r), .planes(planes),
    .busy(cv_busy), .done(cv_done), .obuf(obuf),
    .any_round(cv_round), .any_sat(cv_sat), .any_flush(cv_flush)
  );

  // placement writer
  logic        wr_valid, wr_ready, wr_pending, wr_flushing, wr_full, wr_part, flush_req;
  logic        pw_req_valid, pw_req_ready;
  dram_req_t   pw_req;

  placement_writer #(.L_WEIGHTS(L_WEIGHTS)) u_wr (
    .clk, .rst_n, .wr_valid(wr_valid), .wr_ready(wr_ready), .wr_blk(dec_blk),
    .wr_sub(dec_sub), .wr_data(req_r.wdata), .flush_req(flush_req),
    .pending(wr_pending), .flushing(wr_flushing), .flush_full(wr_full), .flush_part(wr_part),
    .dram_req_valid(pw_req_valid), .dram_req_ready(pw_req_ready), .dram_req(pw_req)
  );

  // DRAM port: the writer and the fetch unit are never active together.
  always_comb begin
    if (wr_flushing) begin
      dram_req_valid = pw_req_valid;
      dram_req       = pw_req;
    end else begin
      dram_req_valid = pf_req_valid;
      dram_req       = pf_req;
    end
  end
  assign pw_req_ready = wr_flushing && dram_req_ready;
  assign pf_req_ready = !wr_flushing && dram_req_ready;

  // control
  logic is_rd, wr_ok;
  assign is_rd  = (req_r.op == HOST_RD);
  assign wr_ok  = dec_hit && dec_fmt == fmt_t'(0);

  assign host_req_ready = (state == S_IDLE);
  assign wr_valid       = (state == S_EXEC) && !is_rd && wr_ok;
  assign flush_req      = (state == S_EXEC) && is_rd && dec_hit;
  assign pf_start       = (state == S_EXEC) && is_rd && dec_hit && !rb_hit &&
                          !wr_pending && !wr_flushing;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state              <= S_IDLE;
      req_r              <= '0;
      host_rsp_valid     <= 1'b0;
      host_rsp           <= '0;
      rb_valid           <= 1'b0;
      rb_fmt             <= '0;
      rb_blk             <= '0;
      rb_cfg             <= '0;
      cv_start           <= 1'b0;
      cfg_r              <= '0;
      miss_r             <= 1'b0;
      stat_dram_rd_lines <= '0;
      stat_dram_wr_lines <= '0;
      stat_host_rd       <= '0;
      stat_buf_hit       <= '0;
    end else begin
      cv_start <= 1'b0;
      if (dram_req_valid && dram_req_ready) begin
        if (dram_req.we) stat_dram_wr_lines <= stat_dram_wr_lines + 1;
        else             stat_dram_rd_lines <= stat_dram_rd_lines + 1;
      end
      case (state)
        S_IDLE: if (host_req_valid) begin
          req_r <= host_req;
          state <= S_EXEC;
        end
        S_EXEC: begin
          host_rsp.op  <= req_r.op;
          host_rsp.tag <= req_r.tag;
          if (!dec_hit || (!is_rd && !wr_ok)) begin
            host_rsp.err   <= 1'b1;
            host_rsp.rdata <= '0;
            host_rsp_valid <= 1'b1;
            state          <= S_RESP;
          end else if (!is_rd) begin
            if (wr_ready) begin
              if (rb_valid && rb_blk == dec_blk) rb_valid <= 1'b0;
              host_rsp.err   <= 1'b0;
              host_rsp.rdata <= '0;
              host_rsp_valid <= 1'b1;
              state          <= S_RESP;
            end
          end else if (!wr_pending && !wr_flushing) begin
            if (rb_hit) begin
              host_rsp.err   <= 1'b0;
              host_rsp.rdata <= obuf[int'(dec_sub) * LINE_BITS +: LINE_BITS];
              host_rsp_valid <= 1'b1;
              stat_host_rd   <= stat_host_rd + 1;
              if (!miss_r) stat_buf_hit <= stat_buf_hit + 1;
              miss_r         <= 1'b0;
              state          <= S_RESP;
            end else begin
              rb_valid <= 1'b0;
              cfg_r    <= cur_cfg;
              miss_r   <= 1'b1;
              state    <= S_FETCH;
            end
          end
        end
        S_FETCH: if (pf_done) begin
          cv_start <= 1'b1;
          state    <= S_CONV;
        end
        S_CONV: if (cv_done) begin
          rb_valid <= 1'b1;
          rb_fmt   <= dec_fmt;
          rb_blk   <= dec_blk;
          rb_cfg   <= cfg_r;
          state    <= S_EXEC;
        end
        S_RESP: if (host_rsp_ready) begin
          host_rsp_valid <= 1'b0;
          state          <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Handshake rules.
  a_one_dram_master: assert property (@(posedge clk) disable iff (!rst_n)
    !(pf_req_valid && pw_req_valid));
  a_rsp_stable: assert property (@(posedge clk) disable iff (!rst_n)
    host_rsp_valid && !host_rsp_ready |=> host_rsp_valid && $stable(host_rsp));

endmodule
