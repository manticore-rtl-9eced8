// tb_fp_subsystem: runs instruction sequences through the FPU subsystem.
// A memory model with random grant stalls serves the load/store port and two
// queues stand in for the SSR streams. Checks: loads, arithmetic on binary64
// and packed binary32, stores (values compared with the simulator's double
// arithmetic on exact values), the dot-product loop with four accumulators
// fed from both streams (192 fmadd.d must issue in about 192 cycles, i.e.
// without hazard stalls), a dependent chain that must stall for the FPU
// latency, and results written into a write stream.
module tb_fp_subsystem;
  import manticore_pkg::*;
  import rv_asm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, lsu_valid, lsu_gnt, lsu_rvalid, ssr_en, idle, fpu_busy;
  offload_t in_d;
  tcdm_req_t lsu_req;
  logic [63:0] lsu_rdata;
  logic [1:0][63:0] ssr_rdata, ssr_wdata;
  logic [1:0] ssr_rvalid, ssr_pop, ssr_push, ssr_wready;
  int checks = 0, failures = 0, cyc = 0, stall = 1, n_fpu = 0;
  logic [63:0] mem [logic [31:0]];
  logic [63:0] sq [2][$];
  logic [63:0] wq [$];
  offload_t prog [$];

  fp_subsystem dut (.clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_ready_o(in_ready), .in_i(in_d),
    .lsu_valid_o(lsu_valid), .lsu_req_o(lsu_req), .lsu_gnt_i(lsu_gnt), .lsu_rvalid_i(lsu_rvalid),
    .lsu_rdata_i(lsu_rdata), .ssr_en_i(ssr_en), .ssr_rdata_i(ssr_rdata), .ssr_rvalid_i(ssr_rvalid),
    .ssr_pop_o(ssr_pop), .ssr_wdata_o(ssr_wdata), .ssr_push_o(ssr_push), .ssr_wready_i(ssr_wready),
    .idle_o(idle), .fpu_busy_o(fpu_busy));

  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) lsu_gnt <= stall ? ($urandom % 3 != 0) : 1'b1;
  always @(posedge clk) begin
    lsu_rvalid <= lsu_valid && lsu_gnt && !lsu_req.we;
    if (lsu_valid && lsu_gnt) begin
      if (lsu_req.we) mem[lsu_req.addr] = lsu_req.wdata;
      else lsu_rdata <= mem.exists(lsu_req.addr) ? mem[lsu_req.addr] : 64'h0;
    end
    for (int s = 0; s < 2; s++) if (ssr_pop[s]) void'(sq[s].pop_front());
    if (ssr_push[0]) wq.push_back(ssr_wdata[0]);
    if (in_valid && in_ready) void'(prog.pop_front());
    if (fpu_busy) n_fpu++;
  end
  always_comb begin
    for (int s = 0; s < 2; s++) begin
      ssr_rvalid[s] = sq[s].size() > 0;
      ssr_rdata[s]  = sq[s].size() > 0 ? sq[s][0] : 64'h0;
    end
    ssr_wready = 2'b11;
    in_valid = prog.size() > 0;
    in_d = prog.size() > 0 ? prog[0] : '0;
  end

  function automatic offload_t I(logic [31:0] ins, logic [31:0] op = 0);
    offload_t o; o.instr = ins; o.op = op; return o;
  endfunction
  function automatic logic [63:0] d(real r); return $realtobits(r); endfunction
  function automatic logic [31:0] s(real r);
    logic [63:0] x; x = $realtobits(r);
    if (x[62:0] == 0) return {x[63], 31'd0};
    return {x[63], 8'(int'(x[62:52]) - 1023 + 127), x[51:29]};
  endfunction
  task automatic expect_mem(logic [31:0] a, logic [63:0] v, string what);
    checks++;
    if (!mem.exists(a) || mem[a] !== v) begin
      failures++; $display("FAIL %s: mem[%h]=%h exp %h", what, a, mem.exists(a) ? mem[a] : 64'hx, v);
    end
  endtask

  initial begin
    int t0, t1;
    real acc [4];
    ssr_en = 0; lsu_rdata = 0; lsu_rvalid = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---- part 1: scalar and packed arithmetic through loads and stores ----
    mem[32'h100] = d(3.0); mem[32'h108] = d(-2.5); mem[32'h110] = d(10.0); mem[32'h118] = {s(1.5), s(4.0)};
    mem[32'h120] = {s(-2.0), s(0.25)};
    prog.push_back(I(fld(2, 0, 0), 32'h100));
    prog.push_back(I(fld(3, 0, 0), 32'h108));
    prog.push_back(I(fld(4, 0, 0), 32'h110));
    prog.push_back(I(fld(5, 0, 0), 32'h118));
    prog.push_back(I(fld(6, 0, 0), 32'h120));
    prog.push_back(I(fmadd_d(7, 2, 3, 4)));    // 3*-2.5+10 = 2.5
    prog.push_back(I(fmul_d(8, 2, 3)));        // -7.5
    prog.push_back(I(fadd_d(9, 2, 4)));        // 13
    prog.push_back(I(fsub_d(10, 2, 4)));       // -7
    prog.push_back(I(fmv_d(11, 3)));           // -2.5
    prog.push_back(I(fmadd_s(12, 5, 6, 5)));   // {1.5*-2+1.5, 4*0.25+4} = {-1.5, 5}
    prog.push_back(I(fmadd_d(13, 7, 7, 8)));   // dependent on 7 and 8: 2.5*2.5-7.5 = -1.25
    for (int i = 7; i <= 13; i++) prog.push_back(I(fsd(i, 0, 0), 32'h200 + 32'(8 * (i - 7))));
    wait (prog.size() == 0); @(posedge clk); wait (idle);
    expect_mem(32'h200, d(2.5), "fmadd.d");
    expect_mem(32'h208, d(-7.5), "fmul.d");
    expect_mem(32'h210, d(13.0), "fadd.d");
    expect_mem(32'h218, d(-7.0), "fsub.d");
    expect_mem(32'h220, d(-2.5), "fmv.d");
    expect_mem(32'h228, {s(-1.5), s(5.0)}, "fmadd.s packed");
    expect_mem(32'h230, d(-1.25), "dependent fmadd.d");

    // ---- part 2: dot products from two read streams, four accumulators ----
    stall = 0;
    ssr_en = 1;
    for (int k = 0; k < 4; k++) begin
      acc[k] = 0.0;
      prog.push_back(I(fmv_d(12 + k, 31)));
    end
    mem[32'h300] = 0; prog.push_back(I(fld(31, 0, 0), 32'h300));  // f31 = 0.0
    // reorder: the zero must be loaded before the moves
    prog.delete();
    prog.push_back(I(fld(31, 0, 0), 32'h300));
    for (int k = 0; k < 4; k++) prog.push_back(I(fmv_d(12 + k, 31)));
    wait (prog.size() == 0); @(posedge clk); wait (idle);
    for (int j = 0; j < 48; j++)
      for (int k = 0; k < 4; k++) begin
        real a, x;
        a = real'(int'($urandom % 17) - 8); x = real'(int'($urandom % 9) - 4);
        sq[0].push_back(d(a)); sq[1].push_back(d(x));
        acc[k] += a * x;
        prog.push_back(I(fmadd_d(12 + k, 0, 1, 12 + k)));
      end
    @(posedge clk); t0 = cyc; n_fpu = 0;
    wait (prog.size() == 0); t1 = cyc;
    checks++;
    if (t1 - t0 > 192 + 2) begin failures++; $display("FAIL 192 fmadd.d took %0d cycles", t1 - t0); end
    ssr_en = 0;
    for (int k = 0; k < 4; k++) prog.push_back(I(fsd(12 + k, 0, 0), 32'h400 + 32'(8 * k)));
    wait (prog.size() == 0); @(posedge clk); wait (idle);
    for (int k = 0; k < 4; k++) expect_mem(32'h400 + 32'(8 * k), d(acc[k]), "dot product");

    // ---- part 3: a dependent chain must wait for the FPU latency ----
    for (int k = 0; k < 8; k++) prog.push_back(I(fadd_d(20, 20, 31)));
    @(posedge clk); t0 = cyc;
    wait (prog.size() == 0); t1 = cyc;
    checks++;
    if (t1 - t0 < 7 * 4) begin failures++; $display("FAIL dependent chain took only %0d cycles", t1 - t0); end

    // ---- part 4: results into a write stream ----
    ssr_en = 1;
    sq[0].delete();
    prog.push_back(I(fadd_d(0, 12, 13)));
    prog.push_back(I(fmul_d(0, 14, 15)));
    wait (prog.size() == 0); @(posedge clk); wait (idle);
    checks++;
    if (wq.size() != 2 || wq[0] !== d(acc[0] + acc[1]) || wq[1] !== d(acc[2] * acc[3])) begin
      failures++; $display("FAIL write stream got %0d values", wq.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
