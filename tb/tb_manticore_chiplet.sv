// tb_manticore_chiplet: end-to-end test of the manticore_chiplet top at reduced size (one S3 with one S2 of two S1 with two clusters each, 32 cores, 1 MiB L2).
//
// The host port loads a program and its data into the L2: an N x N binary64
// matrix A, a vector x and a zero word. When fetch_en_i rises, every core
// boots from the L2 through the cluster, S1 and S2 instruction caches. In
// each cluster core 0 copies A and x into the TCDM with the DMA and
// releases the other cores; all eight compute four rows of y = A x each
// with SSR streams and frep; core 0 then copies y with the DMA to external
// memory (a behavioural model on the ext port) at 0x9000_0000 + 512 *
// cluster. The test checks every y of every cluster bit for bit and counts
// the mechanisms it went through: TCDM bank conflicts, cluster and
// quadrant instruction cache misses, FPU issue, frep replay, SSR traffic,
// DMA activity, uplink back-pressure, crossbar target switch stalls and
// external memory traffic. A mechanism that never happened is a failure.
`timescale 1ns/1ps
module tb_manticore_chiplet;
  import manticore_pkg::*;
  import rv_asm_pkg::*;
  import kernel_pkg::*;

  localparam int N      = 32;
  localparam int R      = 4;
  localparam logic [31:0] SRC   = L2_BASE + 32'h0001_0000;
  localparam logic [31:0] Y_OUT = 32'h9000_0000;
  localparam int NCL    = 4;

  logic clk = 0, rst_n = 0, fetch_en = 0;
  always #1 clk = ~clk;

  logic host_valid = 0, host_we = 0;
  logic [31:0] host_addr = 0;
  logic [WIDE_DW-1:0] host_wdata = '0, host_rdata;
  logic ext_valid, ext_ready, ext_rsp_valid;
  wide_req_t ext_req; wide_rsp_t ext_rsp;
  logic [NCL-1:0] halted, conflict, ic_miss, fpu_issue, frep, dma_busy;
  logic q_miss;

  manticore_chiplet #(.NUM_S3(1), .S2_PER_S3(1), .S1_PER_S2(2), .CL_PER_S1(2), .L2_BYTES(1048576)) dut (
    .clk_i(clk), .rst_ni(rst_n), .chiplet_id_i(2'd0), .fetch_en_i(fetch_en),
    .host_valid_i(host_valid), .host_we_i(host_we), .host_addr_i(host_addr),
    .host_wdata_i(host_wdata), .host_strb_i({WIDE_SW{1'b1}}), .host_rdata_o(host_rdata),
    .ext_valid_o(ext_valid), .ext_req_o(ext_req), .ext_ready_i(ext_ready),
    .ext_rsp_valid_i(ext_rsp_valid), .ext_rsp_i(ext_rsp),
    .halted_o(halted), .conflict_o(conflict), .cl_ic_miss_o(ic_miss), .fpu_issue_o(fpu_issue),
    .frep_o(frep), .dma_busy_o(dma_busy), .q_ic_miss_o(q_miss));

  wide_mem_model #(.STALL(1)) i_ext (
    .clk_i(clk), .valid_i(ext_valid), .req_i(ext_req), .ready_o(ext_ready),
    .rsp_valid_o(ext_rsp_valid), .rsp_o(ext_rsp));

  int checks = 0, failures = 0;
  int n_conf = 0, n_icmiss = 0, n_qmiss = 0, n_issue = 0, n_frep = 0, n_dma = 0;
  int n_ssr = 0, n_bp = 0, n_switch = 0, n_cyc = 0;
  always @(posedge clk) if (fetch_en) begin
    n_cyc++;
    if (|conflict) n_conf++;
    if (|ic_miss) n_icmiss++;
    if (q_miss) n_qmiss++;
    if (|fpu_issue) n_issue++;
    if (|frep) n_frep++;
    if (|dma_busy) n_dma++;
    if (dut.g_cl[0].i_cluster.t_valid[1]) n_ssr++;
    if (|(dut.s3_valid & ~dut.s3_ready)) n_bp++;
    if (dut.i_xbar.m_valid && dut.i_xbar.blocked) n_switch++;
  end

  task automatic host_write(logic [31:0] a, logic [WIDE_DW-1:0] d);
    @(negedge clk);
    host_valid = 1; host_we = 1; host_addr = a - L2_BASE; host_wdata = d;
    @(negedge clk);
    host_valid = 0; host_we = 0;
  endtask

  logic [31:0] prog [$];
  real A [N][N], X [N];
  logic [63:0] img [$];

  task automatic check(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL: %s never happened", what); end
  endtask

  initial begin
    prog = matvec(N, R, 8, 1'b1, SRC, Y_OUT);
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) A[i][j] = real'(int'($urandom % 15) - 7);
    for (int j = 0; j < N; j++) X[j] = real'(int'($urandom % 9) - 4) * 0.25;
    // image of the TCDM input region: A, x, zero
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) img.push_back($realtobits(A[i][j]));
    for (int j = 0; j < N; j++) img.push_back($realtobits(X[j]));
    img.push_back(64'd0);
    while (img.size() % 8 != 0) img.push_back(64'd0);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < (prog.size() + 15) / 16; l++) begin
      logic [WIDE_DW-1:0] d;
      for (int w = 0; w < 16; w++) d[32*w +: 32] = (16*l + w < prog.size()) ? prog[16*l + w] : 32'h0000_0013;
      host_write(BOOT_ADDR + 32'(64 * l), d);
    end
    for (int l = 0; l < img.size() / 8; l++) begin
      logic [WIDE_DW-1:0] d;
      for (int w = 0; w < 8; w++) d[64*w +: 64] = img[8*l + w];
      host_write(SRC + 32'(64 * l), d);
    end
    // read back one line through the host port
    @(negedge clk); host_valid = 1; host_we = 0; host_addr = SRC - L2_BASE;
    @(negedge clk); host_valid = 0;
    checks++; if (host_rdata[63:0] != img[0]) begin failures++; $display("FAIL: host read back"); end
    fetch_en = 1;
    fork
      begin wait (&halted); end
      begin repeat (200000) @(posedge clk); $display("watchdog expired, halted=%b", halted); failures++; end
    join_any
    disable fork;
    repeat (10) @(posedge clk);
    for (int k = 0; k < NCL; k++) begin
      for (int i = 0; i < N; i++) begin
        real ref_y; logic [WIDE_DW-1:0] line; logic [63:0] got;
        ref_y = 0.0;
        for (int j = 0; j < N; j++) ref_y += A[i][j] * X[j];
        line = i_ext.read_line(48'(Y_OUT + 32'(512 * k + 8 * i)));
        got = line[64 * (i % 8) +: 64];
        checks++;
        if (got != $realtobits(ref_y)) begin
          failures++;
          if (failures < 6) $display("FAIL: cluster %0d y[%0d] = %h, expected %f", k, i, got, ref_y);
        end
      end
    end
    check("TCDM bank conflict", n_conf);
    check("cluster instruction cache miss", n_icmiss);
    check("quadrant instruction cache miss", n_qmiss);
    check("FPU issue", n_issue);
    check("frep replay", n_frep);
    check("SSR stream traffic", n_ssr);
    check("DMA transfer", n_dma);
    check("uplink back-pressure", n_bp);
    check("crossbar target switch stall", n_switch);
    check("external memory access", i_ext.n_req);
    $display("cycles %0d: conflicts %0d, cluster ic misses %0d, quadrant ic misses %0d, FPU issue %0d, frep %0d, SSR %0d, DMA %0d, back-pressure %0d, switch stalls %0d, ext requests %0d",
             n_cyc, n_conf, n_icmiss, n_qmiss, n_issue, n_frep, n_ssr, n_dma, n_bp, n_switch, i_ext.n_req);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
