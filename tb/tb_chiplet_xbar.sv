// tb_chiplet_xbar: four sources send random line reads and writes, one at
// a time each, to the L2 window and to external addresses. Behavioural
// memories with random back-pressure and latency model the L2 and the
// external port. The test checks every read against the source's last
// write to that line, that each request reached the right target, and
// that the router stalled on a target switch.
`timescale 1ns/1ps
module tb_chiplet_xbar;
  import manticore_pkg::*;
  localparam int S = 4;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic      [S-1:0] s_valid, s_ready, s_rsp_valid;
  wide_req_t [S-1:0] s_req;
  wide_rsp_t         s_rsp;
  logic l2_valid, l2_ready, l2_rsp_valid, ext_valid, ext_ready, ext_rsp_valid;
  wide_req_t l2_req, ext_req; wide_rsp_t l2_rsp, ext_rsp;

  chiplet_xbar dut (.clk_i(clk), .rst_ni(rst_n),
    .s_valid_i(s_valid), .s_req_i(s_req), .s_ready_o(s_ready), .s_rsp_valid_o(s_rsp_valid), .s_rsp_o(s_rsp),
    .l2_valid_o(l2_valid), .l2_req_o(l2_req), .l2_ready_i(l2_ready), .l2_rsp_valid_i(l2_rsp_valid), .l2_rsp_i(l2_rsp),
    .ext_valid_o(ext_valid), .ext_req_o(ext_req), .ext_ready_i(ext_ready), .ext_rsp_valid_i(ext_rsp_valid), .ext_rsp_i(ext_rsp));

  wide_mem_model #(.STALL(1)) i_l2 (.clk_i(clk), .valid_i(l2_valid), .req_i(l2_req), .ready_o(l2_ready),
    .rsp_valid_o(l2_rsp_valid), .rsp_o(l2_rsp));
  wide_mem_model #(.STALL(1)) i_ext (.clk_i(clk), .valid_i(ext_valid), .req_i(ext_req), .ready_o(ext_ready),
    .rsp_valid_o(ext_rsp_valid), .rsp_o(ext_rsp));

  int checks = 0, failures = 0, n_l2 = 0, n_ext = 0, n_stall = 0, done = 0;
  always @(posedge clk) begin
    if (l2_valid && l2_ready) begin
      n_l2++;
      checks++; if (l2_req.addr < 48'(L2_BASE) || l2_req.addr >= 48'(L2_BASE) + 48'h200_0000) begin failures++; $display("FAIL: %h sent to L2", l2_req.addr); end
    end
    if (ext_valid && ext_ready) begin
      n_ext++;
      checks++; if (ext_req.addr >= 48'(L2_BASE) && ext_req.addr < 48'(L2_BASE) + 48'h200_0000) begin failures++; $display("FAIL: %h sent out", ext_req.addr); end
    end
    if (dut.m_valid && dut.blocked) n_stall++;
  end

  function automatic logic [WIDE_DW-1:0] rnd();
    logic [WIDE_DW-1:0] d;
    for (int w = 0; w < 16; w++) d[32*w +: 32] = $urandom;
    return d;
  endfunction

  initial begin s_valid = '0; s_req = '0; end
  for (genvar s = 0; s < S; s++) begin : g_s
    initial begin : src
      logic [WIDE_DW-1:0] shadow [16];
      bit valid [16];
      wait (rst_n);
      for (int k = 0; k < 150; k++) begin
        int l; logic [47:0] a; bit wr;
        l = $urandom % 16;
        a = (l < 8) ? 48'(L2_BASE) + 48'(s * 4096 + 64 * l) : 48'h0000_9000_0000 + 48'(s * 4096 + 64 * l);
        wr = !valid[l] || ($urandom % 2);
        @(negedge clk);
        s_valid[s] = 1'b1; s_req[s].addr = a; s_req[s].we = wr; s_req[s].wdata = rnd(); s_req[s].strb = '1;
        do @(posedge clk); while (!s_ready[s]);
        if (wr) begin shadow[l] = s_req[s].wdata; valid[l] = 1; end
        @(negedge clk); s_valid[s] = 1'b0;
        while (!s_rsp_valid[s]) @(posedge clk);
        if (!wr) begin
          checks++;
          if (s_rsp.rdata != shadow[l]) begin failures++; $display("FAIL: source %0d line %h", s, a); end
        end
        #0.1;
      end
      done++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      begin repeat (30000) @(posedge clk); $display("watchdog expired"); failures++; end
      wait (done == S);
    join_any
    disable fork;
    checks++; if (n_l2 + n_ext != S * 150) begin failures++; $display("FAIL: %0d requests delivered", n_l2 + n_ext); end
    checks++; if (n_stall == 0) begin failures++; $display("FAIL: no target switch stall"); end
    $display("L2 requests %0d, external %0d, switch stall cycles %0d", n_l2, n_ext, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
