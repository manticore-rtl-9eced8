// tb_l2_memory: random line writes (random byte strobes) and reads through
// both ports of the L2 memory at its full default size, against a
// reference model. Checks read data, the one-cycle response on the bus
// port, and that a write on one port is seen by the other.
`timescale 1ns/1ps
module tb_l2_memory;
  import manticore_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic valid, ready, rsp_valid, h_valid, h_we;
  wide_req_t req; wide_rsp_t rsp;
  logic [31:0] h_addr; logic [WIDE_DW-1:0] h_wdata, h_rdata; logic [WIDE_SW-1:0] h_strb;

  l2_memory dut (.clk_i(clk), .rst_ni(rst_n), .valid_i(valid), .req_i(req), .ready_o(ready),
    .rsp_valid_o(rsp_valid), .rsp_o(rsp), .host_valid_i(h_valid), .host_we_i(h_we),
    .host_addr_i(h_addr), .host_wdata_i(h_wdata), .host_strb_i(h_strb), .host_rdata_o(h_rdata));

  localparam int LINES = 27 * 1024 * 1024 / 64;
  logic [WIDE_DW-1:0] ref_m [int];
  int checks = 0, failures = 0;

  function automatic logic [WIDE_DW-1:0] rnd();
    logic [WIDE_DW-1:0] d;
    for (int w = 0; w < 16; w++) d[32*w +: 32] = $urandom;
    return d;
  endfunction
  function automatic logic [WIDE_SW-1:0] rnds();
    return {$urandom, $urandom};
  endfunction
  function automatic logic [WIDE_DW-1:0] merge(logic [WIDE_DW-1:0] o, logic [WIDE_DW-1:0] n, logic [WIDE_SW-1:0] s);
    for (int b = 0; b < WIDE_SW; b++) if (s[b]) o[8*b +: 8] = n[8*b +: 8];
    return o;
  endfunction

  int lines [16];
  initial begin
    valid = 0; h_valid = 0; h_we = 0; req = '0; h_addr = 0; h_wdata = '0; h_strb = '0;
    for (int i = 0; i < 16; i++) lines[i] = (i < 2) ? i * (LINES - 1) : int'($urandom % LINES);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // initialise the test lines through the host port with full strobes
    foreach (lines[i]) begin
      @(negedge clk); h_valid = 1; h_we = 1; h_addr = 32'(lines[i] * 64); h_strb = '1;
      h_wdata = rnd(); ref_m[lines[i]] = h_wdata;
    end
    @(negedge clk); h_valid = 0;
    fork
      begin repeat (20000) @(posedge clk); $display("watchdog expired"); failures++; end
      begin
        for (int k = 0; k < 2000; k++) begin
          int l, port; bit wr;
          l = lines[$urandom % 16]; wr = $urandom % 2; port = $urandom % 2;
          @(negedge clk);
          valid = 0; h_valid = 0;
          if (port == 0) begin
            valid = 1; req.addr = 48'(L2_BASE) + 48'(l * 64); req.we = wr; req.wdata = rnd(); req.strb = rnds();
            if (wr) begin ref_m[l] = merge(ref_m[l], req.wdata, req.strb); @(posedge clk); end
            else begin
              logic [WIDE_DW-1:0] e; e = ref_m[l];
              @(posedge clk); #0.1;
              checks++;
              if (!(rsp_valid) || rsp.rdata != e) begin failures++; $display("FAIL: bus read line %0d", l); end
            end
          end else begin
            h_valid = 1; h_we = wr; h_addr = 32'(l * 64); h_wdata = rnd(); h_strb = rnds();
            if (wr) begin ref_m[l] = merge(ref_m[l], h_wdata, h_strb); @(posedge clk); end
            else begin
              logic [WIDE_DW-1:0] e; e = ref_m[l];
              @(posedge clk); #0.1;
              checks++;
              if (h_rdata != e) begin failures++; $display("FAIL: host read line %0d", l); end
            end
          end
        end
      end
    join_any
    disable fork;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
