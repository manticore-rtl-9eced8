// tb_quadrant: four members drive a quadrant (shared instruction cache
// variant). Each member runs a random sequence, one request at a time, on
// both links: instruction line reads among 32 lines (so there are hits and
// misses) and data line writes and reads in its own region. Behavioural
// memories with random back-pressure and latency sit on both uplinks. The
// test checks every instruction line against the preloaded pattern and
// every data read against the member's last write, and that misses, hits
// and uplink traffic from several members occurred.
`timescale 1ns/1ps
module tb_quadrant;
  import manticore_pkg::*;
  localparam int M = 4;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic      [M-1:0] mi_valid, mi_ready, mi_rsp_valid, md_valid, md_ready, md_rsp_valid;
  wide_req_t [M-1:0] mi_req, md_req;
  wide_rsp_t [M-1:0] mi_rsp, md_rsp;
  logic ui_valid, ui_ready, ui_rsp_valid, ud_valid, ud_ready, ud_rsp_valid, miss;
  wide_req_t ui_req, ud_req;
  wide_rsp_t ui_rsp, ud_rsp;

  quadrant dut (.clk_i(clk), .rst_ni(rst_n),
    .mi_valid_i(mi_valid), .mi_req_i(mi_req), .mi_ready_o(mi_ready), .mi_rsp_valid_o(mi_rsp_valid), .mi_rsp_o(mi_rsp),
    .md_valid_i(md_valid), .md_req_i(md_req), .md_ready_o(md_ready), .md_rsp_valid_o(md_rsp_valid), .md_rsp_o(md_rsp),
    .ui_valid_o(ui_valid), .ui_req_o(ui_req), .ui_ready_i(ui_ready), .ui_rsp_valid_i(ui_rsp_valid), .ui_rsp_i(ui_rsp),
    .ud_valid_o(ud_valid), .ud_req_o(ud_req), .ud_ready_i(ud_ready), .ud_rsp_valid_i(ud_rsp_valid), .ud_rsp_i(ud_rsp),
    .ic_miss_o(miss));

  wide_mem_model #(.STALL(1)) i_ui (.clk_i(clk), .valid_i(ui_valid), .req_i(ui_req), .ready_o(ui_ready),
    .rsp_valid_o(ui_rsp_valid), .rsp_o(ui_rsp));
  wide_mem_model #(.STALL(1)) i_ud (.clk_i(clk), .valid_i(ud_valid), .req_i(ud_req), .ready_o(ud_ready),
    .rsp_valid_o(ud_rsp_valid), .rsp_o(ud_rsp));

  function automatic logic [WIDE_DW-1:0] pat(logic [47:0] a, int salt);
    logic [WIDE_DW-1:0] d;
    for (int w = 0; w < 16; w++) d[32*w +: 32] = a[31:0] ^ 32'(w * 32'h0101_0101) ^ 32'(salt);
    return d;
  endfunction

  int checks = 0, failures = 0, n_miss = 0, n_ihits = 0;
  always @(posedge clk) if (miss) n_miss++;

  initial begin mi_valid = '0; md_valid = '0; mi_req = '0; md_req = '0; end

  // one instruction and one data process per member
  for (genvar m = 0; m < M; m++) begin : g_m
    initial begin : ip
      wait (rst_n);
      for (int k = 0; k < 60; k++) begin
        logic [47:0] a;
        a = 48'(BOOT_ADDR) + 48'(64 * ($urandom % 32));
        @(negedge clk);
        mi_valid[m] = 1'b1; mi_req[m].addr = a; mi_req[m].instr = 1'b1; mi_req[m].we = 1'b0;
        do @(posedge clk); while (!mi_ready[m]);
        @(negedge clk); mi_valid[m] = 1'b0;
        while (!mi_rsp_valid[m]) @(posedge clk);
        checks++;
        if (mi_rsp[m].rdata != pat(a, 0)) begin failures++; $display("FAIL: member %0d instr line %h", m, a); end
        #0.1;
      end
    end
    initial begin : dp
      logic [WIDE_DW-1:0] shadow [8];
      bit valid [8];
      wait (rst_n);
      for (int k = 0; k < 60; k++) begin
        int l; logic [47:0] a; bit wr;
        l = $urandom % 8;
        a = 48'h0000_9000_0000 + 48'(m * 4096 + 64 * l);
        wr = !valid[l] || ($urandom % 2);
        @(negedge clk);
        md_valid[m] = 1'b1; md_req[m].addr = a; md_req[m].we = wr; md_req[m].instr = 1'b0;
        md_req[m].wdata = pat(a, k + 1); md_req[m].strb = '1;
        do @(posedge clk); while (!md_ready[m]);
        @(negedge clk); md_valid[m] = 1'b0;
        while (!md_rsp_valid[m]) @(posedge clk);
        if (wr) begin shadow[l] = pat(a, k + 1); valid[l] = 1; end
        else begin
          checks++;
          if (md_rsp[m].rdata != shadow[l]) begin failures++; $display("FAIL: member %0d data line %h", m, a); end
        end
        #0.1;
      end
    end
  end

  initial begin
    for (int l = 0; l < 32; l++) i_ui.write_line(48'(BOOT_ADDR) + 48'(64 * l), pat(48'(BOOT_ADDR) + 48'(64 * l), 0));
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      begin repeat (20000) @(posedge clk); $display("watchdog expired"); failures++; end
      begin
        repeat (50) @(posedge clk);
        wait (mi_valid == '0 && md_valid == '0 && i_ud.n_req == 4 * 60);
      end
    join_any
    disable fork;
    repeat (10) @(posedge clk);
    checks++; if (n_miss == 0 || n_miss > 32) begin failures++; $display("FAIL: %0d misses", n_miss); end
    checks++; if (i_ui.n_req != n_miss) begin failures++; $display("FAIL: %0d refills for %0d misses", i_ui.n_req, n_miss); end
    checks++; if (i_ud.n_req != 4 * 60) begin failures++; $display("FAIL: %0d data requests upstream", i_ud.n_req); end
    $display("instruction misses %0d of %0d requests, data requests %0d", n_miss, 4 * 60, i_ud.n_req);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
