// placement_writer_tb: stores full-precision host lines as bit-planes.
//
// The DRAM model starts filled with random data. The test writes: a whole block
// in random line order (must flush on its own, 16 DRAM writes), part of a block
// followed by a write to another block (must flush the partial block first), and a
// part block closed by flush_req. After each flush every plane line in DRAM is
// compared with a reference built from the weights written so far: bit w of
// plane p is bit 15-p of weight w where that weight was written, and the old DRAM
// contents elsewhere.
module placement_writer_tb;
  import sq_pkg::*;

  localparam longint unsigned L = 64'd4096;
  localparam longint unsigned NBLK = L / 512;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                 wr_valid, wr_ready, flush_req, pending, flushing, ffull, fpart;
  logic [DADDR_W-1:0]   wr_blk;
  logic [SUB_W-1:0]     wr_sub;
  logic [LINE_BITS-1:0] wr_data;
  logic                 rq_v, rq_r, rs_v;
  dram_req_t            rq;
  logic [LINE_BITS-1:0] rs_d;
  int n_full = 0, n_part = 0;

  placement_writer #(.L_WEIGHTS(L)) dut (.clk, .rst_n, .wr_valid, .wr_ready, .wr_blk, .wr_sub,
    .wr_data, .flush_req, .pending, .flushing, .flush_full(ffull), .flush_part(fpart),
    .dram_req_valid(rq_v), .dram_req_ready(rq_r), .dram_req(rq));
  dram_model #(.LAT(4), .STALL_PCT(20)) mem (.clk, .rst_n, .dram_req_valid(rq_v),
    .dram_req_ready(rq_r), .dram_req(rq), .dram_rsp_valid(rs_v), .dram_rsp_data(rs_d));

  always @(posedge clk) if (rst_n) begin
    n_full += int'(ffull);
    n_part += int'(fpart);
  end

  logic [LINE_BITS-1:0] init_mem [16 * NBLK];
  logic [15:0]          ref_w   [NBLK * 512];
  bit                   written [NBLK * 512];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic host_write(int b, int s);
    @(negedge clk);
    wr_valid = 1; wr_blk = DADDR_W'(b); wr_sub = SUB_W'(s);
    for (int k = 0; k < 32; k++) begin
      wr_data[k*16 +: 16] = 16'($urandom);
      ref_w[b*512 + s*32 + k]   = wr_data[k*16 +: 16];
      written[b*512 + s*32 + k] = 1;
    end
    @(posedge clk);
    while (!wr_ready) @(posedge clk);
    @(negedge clk); wr_valid = 0;
  endtask

  task automatic wait_idle();
    repeat (2) @(posedge clk);
    while (flushing) @(posedge clk);
    repeat (2) @(posedge clk);
  endtask

  task automatic check_mem();
    for (int b = 0; b < int'(NBLK); b++)
      for (int p = 0; p < 16; p++) begin
        logic [LINE_BITS-1:0] e;
        e = init_mem[longint'(p) * NBLK + b];
        for (int w = 0; w < 512; w++)
          if (written[b*512 + w]) e[w] = ref_w[b*512 + w][15 - p];
        checks++;
        if (mem.peek(DADDR_W'(longint'(p) * NBLK + b)) !== e) begin
          failures++;
          if (failures < 10) $display("plane %0d block %0d mismatch", p, b);
        end
      end
  endtask

  initial begin
    int order[16];
    wr_valid = 0; flush_req = 0; wr_blk = '0; wr_sub = '0; wr_data = '0;
    for (int i = 0; i < int'(NBLK) * 512; i++) written[i] = 0;
    for (int a = 0; a < 16 * int'(NBLK); a++) begin
      for (int k = 0; k < 16; k++) init_mem[a][k*32 +: 32] = $urandom;
      mem.poke(DADDR_W'(a), init_mem[a]);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1: full block 3 in shuffled order
    for (int i = 0; i < 16; i++) order[i] = i;
    order.shuffle();
    for (int i = 0; i < 16; i++) host_write(3, order[i]);
    wait_idle();
    checks += 2;
    if (pending) failures++;
    if (n_full != 1) begin failures++; $display("full flush count %0d", n_full); end
    check_mem();
    // 2: partial block 5, then a write to block 1 forces the flush
    host_write(5, 0); host_write(5, 7); host_write(5, 15);
    checks++;
    if (!pending || mem.n_wr != 16) failures++;
    host_write(1, 2);
    wait_idle();
    checks++;
    if (n_part != 1) begin failures++; $display("partial flush count %0d", n_part); end
    // 3: flush_req closes block 1
    @(negedge clk); flush_req = 1;
    @(negedge clk); flush_req = 0;
    wait_idle();
    checks += 3;
    if (n_part != 2) failures++;
    if (pending) failures++;
    if (mem.n_wr != 48) begin failures++; $display("dram writes %0d", mem.n_wr); end
    check_mem();
    // 4: rewrite part of block 3 and fill block 0 completely
    host_write(3, 4);
    for (int i = 0; i < 16; i++) host_write(0, i);
    wait_idle();
    checks++;
    if (n_full != 2 || n_part != 3) begin failures++; $display("full %0d part %0d", n_full, n_part); end
    check_mem();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
