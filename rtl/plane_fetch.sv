// plane_fetch: just-enough bit-plane fetch for one block.
//
// On start it asks bitplane_map which of the 16 bit-planes the requested format
// (with its d_e/d_m rounding planes) needs, issues one DRAM line read per selected
// plane, lowest plane first, one per cycle while the DRAM port is ready, and
// stores each returned line in planes[p]. Planes that are not fetched read as 0.
// A read at reduced precision therefore moves only 1+(r_e+d_e)+(r_m+d_m) lines
// out of DRAM instead of 16, which is the paper's proportional-efficiency goal.
//
// DRAM port: dram_req_valid/ready handshake carrying a dram_req_t; read data comes
// back in request order on dram_rsp_valid/dram_rsp_data with no back-pressure, and
// any number of reads may be outstanding. Timing: start for one cycle while idle;
// done pulses for one cycle after the last plane line arrived; planes hold their
// value until the next start. The ordering rules are this design's choice.
module plane_fetch
  import sq_pkg::*;
#(
  parameter longint unsigned L_WEIGHTS = 64'd30_000_000_000
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  fmt_t                  fmt,
  input  round_cfg_t            rcfg,
  input  logic [DADDR_W-1:0]    blk,
  output logic                  busy,
  output logic                  done,
  output logic [4:0]            lines_fetched,   // plane lines read for the last block
  output logic [BLK_W-1:0]      planes [N1],
  // DRAM port
  output logic                  dram_req_valid,
  input  logic                  dram_req_ready,
  output dram_req_t             dram_req,
  input  logic                  dram_rsp_valid,
  input  logic [LINE_BITS-1:0]  dram_rsp_data
);

  logic [N1-1:0]      mask_now, mask_r, issued, received;
  logic [4:0]         count_now;
  logic [3:0]         iss_p, rcv_p;
  logic [DADDR_W-1:0] blk_r, line_addr;

  bitplane_map #(.L_WEIGHTS(L_WEIGHTS)) u_map (
    .fmt(fmt), .rcfg(rcfg), .plane_mask(mask_now), .plane_count(count_now),
    .plane(iss_p), .blk(blk_r), .line_addr(line_addr)
  );

  // Lowest plane still to issue and lowest plane still to receive.
  always_comb begin
    iss_p = '0;
    for (int p = N1 - 1; p >= 0; p--) if (mask_r[p] && !issued[p])   iss_p = 4'(p);
    rcv_p = '0;
    for (int p = N1 - 1; p >= 0; p--) if (mask_r[p] && !received[p]) rcv_p = 4'(p);
  end

  assign dram_req_valid = busy && ((mask_r & ~issued) != '0);
  always_comb begin
    dram_req       = '0;
    dram_req.we    = 1'b0;
    dram_req.addr  = line_addr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy          <= 1'b0;
      done          <= 1'b0;
      mask_r        <= '0;
      issued        <= '0;
      received      <= '0;
      blk_r         <= '0;
      lines_fetched <= '0;
      for (int p = 0; p < N1; p++) planes[p] <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        mask_r        <= mask_now;
        issued        <= '0;
        received      <= '0;
        blk_r         <= blk;
        lines_fetched <= count_now;
        busy          <= (mask_now != '0);
        done          <= (mask_now == '0);
        for (int p = 0; p < N1; p++) planes[p] <= '0;
      end else if (busy) begin
        if (dram_req_valid && dram_req_ready) issued[iss_p] <= 1'b1;
        if (dram_rsp_valid) begin
          planes[rcv_p]   <= dram_rsp_data;
          received[rcv_p] <= 1'b1;
          if ((mask_r & ~received) == (N1'(1) << rcv_p)) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

endmodule
