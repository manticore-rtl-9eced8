// tb_wide_mux: four members issue random reads and writes of tagged lines
// through the multiplexer into a memory model with random stalls and
// latencies. Each member keeps its own expectation queue: every response must
// arrive at the member that issued the request, in its order, with the data
// the reference memory held when the request passed the uplink. Also checks
// that all members are served (no starvation) and that the uplink never
// carries more than one request per cycle.
module tb_wide_mux;
  import manticore_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] s_valid, s_ready, s_rsp_valid;
  wide_req_t [N-1:0] s_req;
  wide_rsp_t s_rsp, m_rsp;
  logic m_valid, m_ready, m_rsp_valid;
  wide_req_t m_req;
  int checks = 0, failures = 0;
  int served [N];
  logic [WIDE_DW-1:0] ref_mem [logic [WIDE_AW-1:0]];
  logic [WIDE_DW-1:0] expq [N][$];
  int left [N];

  wide_mux #(.N(N)) dut (.clk_i(clk), .rst_ni(rst_n), .s_valid_i(s_valid), .s_req_i(s_req), .s_ready_o(s_ready),
    .s_rsp_valid_o(s_rsp_valid), .s_rsp_o(s_rsp), .m_valid_o(m_valid), .m_req_o(m_req), .m_ready_i(m_ready),
    .m_rsp_valid_i(m_rsp_valid), .m_rsp_i(m_rsp));
  wide_mem_model mem (.clk_i(clk), .valid_i(m_valid), .req_i(m_req), .ready_o(m_ready),
    .rsp_valid_o(m_rsp_valid), .rsp_o(m_rsp));

  always @(posedge clk) begin
    for (int p = 0; p < N; p++) begin
      if (s_rsp_valid[p]) begin
        logic [WIDE_DW-1:0] e;
        checks++;
        if (expq[p].size() == 0) begin failures++; $display("FAIL member %0d: unexpected response", p); end
        else begin
          e = expq[p].pop_front();
          if (s_rsp.rdata !== e) begin failures++; $display("FAIL member %0d: wrong data", p); end
        end
      end
      if (s_valid[p] && s_ready[p]) begin
        logic [WIDE_DW-1:0] l;
        served[p]++;
        l = ref_mem.exists(s_req[p].addr) ? ref_mem[s_req[p].addr] : '0;
        if (s_req[p].we) l = s_req[p].wdata;
        ref_mem[s_req[p].addr] = l;
        expq[p].push_back(l);
        s_valid[p] <= 1'b0;
      end
    end
    if ($countones(s_valid & s_ready) > 1) begin failures++; $display("FAIL two grants in one cycle"); end
  end
  always @(negedge clk) begin
    for (int p = 0; p < N; p++) if (rst_n && !s_valid[p] && left[p] > 0 && $urandom % 2 == 0) begin
      s_valid[p] <= 1'b1;
      s_req[p].addr  <= WIDE_AW'(64 * ($urandom % 32));
      s_req[p].we    <= $urandom % 2;
      s_req[p].instr <= 1'b0;
      s_req[p].wdata <= {16{$urandom}};
      s_req[p].strb  <= '1;
      left[p]--;
    end
  end

  initial begin
    s_valid = '0; s_req = '0;
    foreach (left[p]) begin left[p] = 500; served[p] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (left[0] == 0 && left[1] == 0 && left[2] == 0 && left[3] == 0);
    repeat (40) @(posedge clk);
    for (int p = 0; p < N; p++) begin
      checks++;
      if (served[p] != 500 || expq[p].size() != 0) begin
        failures++; $display("FAIL member %0d served %0d, %0d responses missing", p, served[p], expq[p].size());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
