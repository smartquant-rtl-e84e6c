// dram_model: behavioural stand-in for the DRAM channels behind the controller.
//
// A sparse line memory (64-byte lines, indexed by line address) with a fixed read
// latency of LAT cycles, any number of reads in flight and responses in request
// order. Writes honour byte enables and take effect when accepted; a read returns
// the contents at the time it is accepted. Lines never written read as zero.
// dram_req_ready drops at random for STALL_PCT percent of cycles. It models no DRAM
// timing beyond that; it only gives the controller something to talk to.
module dram_model
  import sq_pkg::*;
#(
  parameter int unsigned LAT       = 8,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  dram_req_valid,
  output logic                  dram_req_ready,
  input  dram_req_t             dram_req,
  output logic                  dram_rsp_valid,
  output logic [LINE_BITS-1:0]  dram_rsp_data
);
  logic [LINE_BITS-1:0] mem [logic [DADDR_W-1:0]];
  logic [LINE_BITS-1:0] q_data [$];
  longint               q_due  [$];
  longint               cyc;
  int unsigned          n_rd, n_wr;

  function automatic logic [LINE_BITS-1:0] peek(logic [DADDR_W-1:0] a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  task automatic poke(logic [DADDR_W-1:0] a, logic [LINE_BITS-1:0] d);
    mem[a] = d;
  endtask

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc            <= 0;
      dram_req_ready <= 1'b0;
      dram_rsp_valid <= 1'b0;
      dram_rsp_data  <= '0;
      n_rd           <= 0;
      n_wr           <= 0;
      q_data.delete();
      q_due.delete();
    end else begin
      cyc <= cyc + 1;
      if (dram_req_valid && dram_req_ready) begin
        if (dram_req.we) begin
          logic [LINE_BITS-1:0] cur;
          cur = peek(dram_req.addr);
          for (int b = 0; b < LINE_BYTES; b++)
            if (dram_req.be[b]) cur[b*8 +: 8] = dram_req.wdata[b*8 +: 8];
          mem[dram_req.addr] = cur;
          n_wr <= n_wr + 1;
        end else begin
          q_data.push_back(peek(dram_req.addr));
          q_due.push_back(cyc + LAT);
          n_rd <= n_rd + 1;
        end
      end
      dram_req_ready <= ($urandom_range(99) >= STALL_PCT);
      if (q_due.size() > 0 && q_due[0] <= cyc) begin
        dram_rsp_valid <= 1'b1;
        dram_rsp_data  <= q_data.pop_front();
        void'(q_due.pop_front());
      end else begin
        dram_rsp_valid <= 1'b0;
      end
    end
  end
endmodule
