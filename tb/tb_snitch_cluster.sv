// tb_snitch_cluster: one cluster runs the DMA version of the matrix-vector
// kernel (N = 32, four rows per core, eight cores). Behavioural wide-bus
// memories with random back-pressure and latency sit on the instruction
// refill uplink (holding the program at BOOT_ADDR) and on the DMA uplink
// (holding A and x, and receiving y). The test checks every y element bit
// for bit, that all cores halt, and that bank conflicts, instruction cache
// misses, frep and the DMA all occurred.
`timescale 1ns/1ps
module tb_snitch_cluster;
  import manticore_pkg::*;
  import rv_asm_pkg::*;
  import kernel_pkg::*;

  localparam int N = 32;
  localparam logic [31:0] SRC   = 32'h8001_0000;
  localparam logic [31:0] Y_OUT = 32'h9000_0000;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic ic_valid, ic_ready, ic_rsp_valid, dm_valid, dm_ready, dm_rsp_valid;
  wide_req_t ic_req, dm_req;
  wide_rsp_t ic_rsp, dm_rsp;
  logic [7:0] halted, issue, frep;
  logic [4:0] conflicts;
  logic ic_miss, dma_busy;

  snitch_cluster dut (
    .clk_i(clk), .rst_ni(rst_n), .cluster_id_i(32'd0), .fetch_en_i(1'b1),
    .ic_valid_o(ic_valid), .ic_req_o(ic_req), .ic_ready_i(ic_ready),
    .ic_rsp_valid_i(ic_rsp_valid), .ic_rsp_i(ic_rsp),
    .dm_valid_o(dm_valid), .dm_req_o(dm_req), .dm_ready_i(dm_ready),
    .dm_rsp_valid_i(dm_rsp_valid), .dm_rsp_i(dm_rsp),
    .halted_o(halted), .conflicts_o(conflicts), .ic_miss_o(ic_miss),
    .fpu_issue_o(issue), .frep_busy_o(frep), .dma_busy_o(dma_busy));

  wide_mem_model #(.STALL(1)) i_imem (.clk_i(clk), .valid_i(ic_valid), .req_i(ic_req), .ready_o(ic_ready),
    .rsp_valid_o(ic_rsp_valid), .rsp_o(ic_rsp));
  wide_mem_model #(.STALL(1)) i_dmem (.clk_i(clk), .valid_i(dm_valid), .req_i(dm_req), .ready_o(dm_ready),
    .rsp_valid_o(dm_rsp_valid), .rsp_o(dm_rsp));

  int checks = 0, failures = 0;
  int n_conf = 0, n_miss = 0, n_frep = 0, n_dma = 0, n_issue = 0;
  always @(posedge clk) if (rst_n) begin
    if (conflicts != 0) n_conf++;
    if (ic_miss) n_miss++;
    if (|frep) n_frep++;
    if (dma_busy) n_dma++;
    n_issue += $countones(issue);
  end

  logic [31:0] prog [$];
  logic [63:0] img [$];
  real A [N][N], X [N];

  task automatic check(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL: %s never happened", what); end
  endtask

  initial begin
    prog = matvec(N, 4, 8, 1'b1, SRC, Y_OUT);
    for (int l = 0; l < (prog.size() + 15) / 16; l++) begin
      logic [WIDE_DW-1:0] d;
      for (int w = 0; w < 16; w++) d[32*w +: 32] = (16*l + w < prog.size()) ? prog[16*l + w] : 32'h0000_0013;
      i_imem.write_line(48'(BOOT_ADDR + 32'(64 * l)), d);
    end
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) A[i][j] = real'(int'($urandom % 15) - 7);
    for (int j = 0; j < N; j++) X[j] = real'(int'($urandom % 9) - 4) * 0.5;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) img.push_back($realtobits(A[i][j]));
    for (int j = 0; j < N; j++) img.push_back($realtobits(X[j]));
    img.push_back(64'd0);
    while (img.size() % 8 != 0) img.push_back(64'd0);
    for (int l = 0; l < img.size() / 8; l++) begin
      logic [WIDE_DW-1:0] d;
      for (int w = 0; w < 8; w++) d[64*w +: 64] = img[8*l + w];
      i_dmem.write_line(48'(SRC + 32'(64 * l)), d);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      begin wait (&halted); end
      begin repeat (100000) @(posedge clk); $display("watchdog expired, halted=%b", halted); failures++; end
    join_any
    disable fork;
    repeat (5) @(posedge clk);
    for (int i = 0; i < N; i++) begin
      real ref_y; logic [WIDE_DW-1:0] line; logic [63:0] got;
      ref_y = 0.0;
      for (int j = 0; j < N; j++) ref_y += A[i][j] * X[j];
      line = i_dmem.read_line(48'(Y_OUT + 32'(8 * i)));
      got = line[64 * (i % 8) +: 64];
      checks++;
      if (got != $realtobits(ref_y)) begin
        failures++;
        if (failures < 6) $display("FAIL: y[%0d] = %h, expected %f", i, got, ref_y);
      end
    end
    checks++; if (n_issue != N * N + N) begin failures++; $display("FAIL: %0d FPU ops, expected %0d", n_issue, N * N + N); end
    check("bank conflict", n_conf);
    check("instruction cache miss", n_miss);
    check("frep", n_frep);
    check("DMA", n_dma);
    $display("conflict cycles %0d, icache misses %0d, FPU ops %0d, DMA busy cycles %0d", n_conf, n_miss, n_issue, n_dma);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
