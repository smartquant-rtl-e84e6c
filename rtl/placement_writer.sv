// placement_writer: writes the full-precision model into DRAM in bit-plane placement.
//
// The host loads the model by writing FP16 weights to region P_1 of the logical
// space. A host line carries 32 weights (weight k in bits [16k +: 16]) and is line
// `sub` (0..15) of a 512-weight block. The writer transposes each line into the
// block's 16 plane lines held in a write buffer: weight 32*sub+k goes to bit
// 32*sub+k of plane p, for each plane p, so one host line fills bytes
// 4*sub..4*sub+3 of all 16 plane lines. The buffer is flushed as 16 DRAM line
// writes with byte enables for the bytes that were written: when all 16 lines of
// the block are in, when a write to another block arrives, or on flush_req (the
// controller asks for this before serving a read, so reads see every earlier
// write). The paper states only that weights are stored as independent bit-planes;
// the write buffer and its flush rules are this design's way of getting there.
//
// Interface: wr_valid/wr_ready handshake for host lines; DRAM port as in
// plane_fetch (writes produce no response and are applied in order).
module placement_writer
  import sq_pkg::*;
#(
  parameter longint unsigned L_WEIGHTS = 64'd30_000_000_000
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  wr_valid,
  output logic                  wr_ready,
  input  logic [DADDR_W-1:0]    wr_blk,
  input  logic [SUB_W-1:0]      wr_sub,
  input  logic [LINE_BITS-1:0]  wr_data,
  input  logic                  flush_req,
  output logic                  pending,      // buffer holds unwritten data
  output logic                  flushing,
  output logic                  flush_full,   // pulse: a complete block was flushed
  output logic                  flush_part,   // pulse: a partial block was flushed
  // DRAM port
  output logic                  dram_req_valid,
  input  logic                  dram_req_ready,
  output dram_req_t             dram_req
);

  localparam int unsigned WPL = LINE_BITS / N1;   // weights per host line (32)
  localparam int unsigned BPL = WPL / 8;          // bytes of a plane line per host line (4)

  logic [BLK_W-1:0]      pbuf [N1];
  logic [LINE_BYTES-1:0] bmask;
  logic [DADDR_W-1:0]    blk_r, line_addr;
  logic [3:0]            fp;
  logic                  full_r;

  bitplane_map #(.L_WEIGHTS(L_WEIGHTS)) u_map (
    .fmt('0), .rcfg('0), .plane_mask(), .plane_count(),
    .plane(fp), .blk(blk_r), .line_addr(line_addr)
  );

  assign wr_ready = !flushing && !(pending && wr_blk != blk_r);

  assign dram_req_valid = flushing;
  always_comb begin
    dram_req       = '0;
    dram_req.we    = 1'b1;
    dram_req.addr  = line_addr;
    dram_req.be    = bmask;
    dram_req.wdata = pbuf[fp];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending    <= 1'b0;
      flushing   <= 1'b0;
      flush_full <= 1'b0;
      flush_part <= 1'b0;
      bmask      <= '0;
      blk_r      <= '0;
      fp         <= '0;
      full_r     <= 1'b0;
      for (int p = 0; p < N1; p++) pbuf[p] <= '0;
    end else begin
      flush_full <= 1'b0;
      flush_part <= 1'b0;
      if (flushing) begin
        if (dram_req_ready) begin
          fp <= fp + 4'd1;
          if (fp == 4'(N1 - 1)) begin
            flushing   <= 1'b0;
            pending    <= 1'b0;
            bmask      <= '0;
            flush_full <= full_r;
            flush_part <= !full_r;
          end
        end
      end else if (wr_valid && wr_ready) begin
        pending <= 1'b1;
        blk_r   <= wr_blk;
        for (int k = 0; k < int'(WPL); k++)
          for (int p = 0; p < N1; p++)
            pbuf[p][int'(wr_sub) * WPL + k] <= wr_data[k * N1 + (N1 - 1 - p)];
        bmask[int'(wr_sub) * BPL +: BPL] <= '1;
        if ((bmask | (LINE_BYTES'({BPL{1'b1}}) << (int'(wr_sub) * BPL))) == '1) begin
          flushing <= 1'b1;
          full_r   <= 1'b1;
          fp       <= '0;
        end
      end else if (pending && (flush_req || (wr_valid && wr_blk != blk_r))) begin
        flushing <= 1'b1;
        full_r   <= (bmask == '1);
        fp       <= '0;
      end
    end
  end

endmodule
