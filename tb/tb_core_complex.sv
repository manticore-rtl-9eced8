// tb_core_complex: runs the matrix-vector kernel (N = 48, all rows on one
// core, the paper's worked example) on one core complex. The testbench
// models the instruction refill port (a line two cycles after the request)
// and the two TCDM ports (random grants, read data one cycle after the
// grant). It checks every y element against a reference computed here and
// checks that the FPU issued an operation in most cycles of the kernel,
// that frep replayed and that both SSR ports were used.
`timescale 1ns/1ps
module tb_core_complex;
  import manticore_pkg::*;
  import rv_asm_pkg::*;
  import kernel_pkg::*;

  localparam int N = 48;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic ic_req_valid, ic_req_ready, ic_rsp_valid;
  logic [WIDE_AW-1:0] ic_req_addr;
  logic [WIDE_DW-1:0] ic_rsp_data;
  logic [1:0] t_valid, t_gnt, t_rvalid;
  tcdm_req_t [1:0] t_req;
  logic [1:0][63:0] t_rdata;
  logic p_valid, p_we; logic [7:0] p_addr; logic [31:0] p_wdata;
  logic halted, fpu_issue, frep_busy;

  core_complex dut (
    .clk_i(clk), .rst_ni(rst_n), .hart_id_i(32'd0), .fetch_en_i(1'b1),
    .ic_req_valid_o(ic_req_valid), .ic_req_addr_o(ic_req_addr), .ic_req_ready_i(ic_req_ready),
    .ic_rsp_valid_i(ic_rsp_valid), .ic_rsp_data_i(ic_rsp_data),
    .tcdm_valid_o(t_valid), .tcdm_req_o(t_req), .tcdm_gnt_i(t_gnt),
    .tcdm_rvalid_i(t_rvalid), .tcdm_rdata_i(t_rdata),
    .periph_valid_o(p_valid), .periph_we_o(p_we), .periph_addr_o(p_addr),
    .periph_wdata_o(p_wdata), .periph_rdata_i(32'd0),
    .halted_o(halted), .fpu_issue_o(fpu_issue), .frep_busy_o(frep_busy));

  logic [31:0] prog [$];
  logic [63:0] mem [logic [31:0]];
  int checks = 0, failures = 0;

  // instruction refill: one outstanding request, answered two cycles later
  int ic_cnt = 0; logic [WIDE_AW-1:0] ic_addr_q; logic ic_busy = 0;
  assign ic_req_ready = !ic_busy;
  always @(posedge clk) begin
    ic_rsp_valid <= 1'b0;
    if (ic_req_valid && ic_req_ready) begin ic_busy <= 1; ic_addr_q <= ic_req_addr; ic_cnt <= 2; end
    else if (ic_busy) begin
      if (ic_cnt == 1) begin
        ic_busy <= 0; ic_rsp_valid <= 1'b1;
        for (int w = 0; w < 16; w++) begin
          int idx; idx = (int'(ic_addr_q[31:0] - BOOT_ADDR) >> 2) + w;
          ic_rsp_data[32*w +: 32] <= (idx >= 0 && idx < prog.size()) ? prog[idx] : 32'h0000_0013;
        end
      end
      ic_cnt <= ic_cnt - 1;
    end
  end

  // TCDM ports: random grant, data one cycle after a read grant
  int n_port_use [2];
  always_comb for (int i = 0; i < 2; i++) t_gnt[i] = t_valid[i] && gnt_rand[i];
  logic [1:0] gnt_rand;
  always @(negedge clk) for (int i = 0; i < 2; i++) gnt_rand[i] = ($urandom % 8) != 0;
  always @(posedge clk) for (int i = 0; i < 2; i++) begin
    t_rvalid[i] <= t_gnt[i] && !t_req[i].we;
    if (t_gnt[i]) begin
      logic [31:0] a; a = {t_req[i].addr[31:3], 3'b0};
      n_port_use[i]++;
      if (t_req[i].we) begin
        logic [63:0] o; o = mem.exists(a) ? mem[a] : 64'd0;
        for (int b = 0; b < 8; b++) if (t_req[i].strb[b]) o[8*b +: 8] = t_req[i].wdata[8*b +: 8];
        mem[a] = o;
      end else t_rdata[i] <= mem.exists(a) ? mem[a] : 64'hDEAD_BEEF_DEAD_BEEF;
    end
  end

  real A [N][N], X [N];
  int cyc = 0, k_start = -1, k_end = -1, n_issue = 0, n_frep_cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (fpu_issue) begin n_issue++; if (k_start < 0) k_start = cyc; k_end = cyc; end
    if (frep_busy) n_frep_cyc++;
  end

  initial begin
    prog = matvec(N, N, 1, 1'b0, 32'd0, 32'd0);
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      A[i][j] = real'(int'($urandom % 17) - 8);
      mem[a_addr(N) + 32'(8 * (i * N + j))] = $realtobits(A[i][j]);
    end
    for (int j = 0; j < N; j++) begin
      X[j] = real'(int'($urandom % 9) - 4) / 2.0;
      mem[x_addr(N) + 32'(8 * j)] = $realtobits(X[j]);
    end
    mem[zero_addr(N)] = 64'd0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    fork
      begin wait (halted); end
      begin repeat (200000) @(posedge clk); $display("watchdog expired"); failures++; end
    join_any
    disable fork;
    repeat (5) @(posedge clk);
    for (int i = 0; i < N; i++) begin
      real ref_y; ref_y = 0.0;
      for (int j = 0; j < N; j++) ref_y += A[i][j] * X[j];
      checks++;
      if (!mem.exists(y_addr(N) + 32'(8 * i)) || mem[y_addr(N) + 32'(8 * i)] != $realtobits(ref_y)) begin
        failures++;
        if (failures < 5) $display("y[%0d] got %h expected %f", i, mem[y_addr(N) + 32'(8 * i)], ref_y);
      end
    end
    // FPU work: N*N fmadd plus 4 fmv.d per 4 rows
    checks++; if (n_issue != N * N + N) begin failures++; $display("issued %0d FPU ops, expected %0d", n_issue, N * N + N); end
    checks++; if (real'(n_issue) / real'(k_end - k_start + 1) < 0.75) begin
      failures++; $display("FPU utilisation too low"); end
    checks++; if (n_frep_cyc == 0) failures++;
    checks++; if (n_port_use[1] < N * N) begin failures++; $display("SSR port 1 used %0d times", n_port_use[1]); end
    $display("kernel: %0d FPU ops in %0d cycles (utilisation %0.3f), %0d instructions in the program",
             n_issue, k_end - k_start + 1, real'(n_issue) / real'(k_end - k_start + 1), prog.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
