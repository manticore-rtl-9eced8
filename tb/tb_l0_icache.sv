// tb_l0_icache: a fetch stream that walks through loops and jumps over a
// program region is served by the L0 cache, whose refills come from a model
// of the shared cache with random latency. Checks every fetched word against
// the program image, that hits answer in the same cycle, that a loop of
// 16 instructions runs without misses after its first pass, and that the
// cache refills again after more lines than it holds have been used.
module tb_l0_icache;
  import manticore_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic fetch_valid, fetch_ready, req_valid, req_ready, rsp_valid;
  logic [31:0] fetch_addr, fetch_data;
  logic [WIDE_AW-1:0] req_addr;
  logic [WIDE_DW-1:0] rsp_data;
  int checks = 0, failures = 0, n_req = 0;

  l0_icache dut (.clk_i(clk), .rst_ni(rst_n), .fetch_valid_i(fetch_valid), .fetch_addr_i(fetch_addr),
    .fetch_ready_o(fetch_ready), .fetch_data_o(fetch_data), .req_valid_o(req_valid), .req_addr_o(req_addr),
    .req_ready_i(req_ready), .rsp_valid_i(rsp_valid), .rsp_data_i(rsp_data));

  function automatic logic [31:0] word(logic [31:0] a); return a * 32'd2654435761; endfunction

  logic busy = 0; int wt; logic [WIDE_AW-1:0] ra;
  always @(negedge clk) req_ready <= !busy && ($urandom % 2 == 0);
  always @(posedge clk) begin
    rsp_valid <= 1'b0;
    if (req_valid && req_ready) begin busy <= 1; ra <= req_addr; wt <= int'($urandom % 4); n_req++; end
    else if (busy) begin
      if (wt == 0) begin
        busy <= 0; rsp_valid <= 1;
        for (int i = 0; i < 16; i++) rsp_data[32*i +: 32] <= word(32'(ra) + 32'(4*i));
      end else wt <= wt - 1;
    end
  end

  // fetch one address until it hits; check the word
  task automatic fetch(logic [31:0] a);
    @(negedge clk); fetch_valid = 1; fetch_addr = a;
    #1;
    while (!fetch_ready) begin @(negedge clk); #1; end
    checks++;
    if (fetch_data !== word(a)) begin failures++; $display("FAIL fetch %h got %h", a, fetch_data); end
    @(posedge clk);
  endtask

  initial begin
    int r0;
    fetch_valid = 0; fetch_addr = 0; rsp_valid = 0; rsp_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // loop of 16 instructions (one line) for 10 passes, plus a jump target line
    for (int it = 0; it < 10; it++) begin
      if (it == 1) r0 = n_req;
      for (int i = 0; i < 16; i++) fetch(32'h8000_0040 + 32'(4*i));
      fetch(32'h8000_0400);
    end
    checks++;
    if (n_req != r0) begin failures++; $display("FAIL %0d refills inside a cached loop", n_req - r0); end
    // touch 6 lines, then the first again: it must have been replaced
    r0 = n_req;
    for (int l = 0; l < 6; l++) fetch(32'h8000_1000 + 32'(64*l));
    fetch(32'h8000_1000);
    checks++;
    if (n_req != r0 + 7) begin failures++; $display("FAIL expected 7 refills, saw %0d", n_req - r0); end
    // random fetches
    for (int i = 0; i < 500; i++) fetch(32'h8000_0000 + 32'(4 * ($urandom % 128)));
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
