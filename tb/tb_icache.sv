// tb_icache: eight requesters ask for random line addresses from a range
// larger than the cache, so that hits, misses and conflict evictions all
// occur. The refill port is served by a memory model with random latency
// whose line contents are a function of the address. Checks every returned
// line, that each refill is marked as an instruction read, that both hits and
// misses happened, and that a hit with a single requester answers on the
// next cycle.
module tb_icache;
  import manticore_pkg::*;
  localparam int NP = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NP-1:0] req_valid, req_ready, rsp_valid;
  logic [NP-1:0][WIDE_AW-1:0] req_addr;
  logic [WIDE_DW-1:0] rsp_data;
  logic refill_valid, refill_ready, refill_rsp_valid, miss;
  wide_req_t refill_req;
  wide_rsp_t refill_rsp;
  int checks = 0, failures = 0, n_miss = 0, n_rsp = 0, cyc = 0;

  icache dut (.clk_i(clk), .rst_ni(rst_n), .req_valid_i(req_valid), .req_addr_i(req_addr), .req_ready_o(req_ready),
    .rsp_valid_o(rsp_valid), .rsp_data_o(rsp_data), .refill_valid_o(refill_valid), .refill_req_o(refill_req),
    .refill_ready_i(refill_ready), .refill_rsp_valid_i(refill_rsp_valid), .refill_rsp_i(refill_rsp), .miss_o(miss));

  function automatic logic [WIDE_DW-1:0] line(logic [WIDE_AW-1:0] a);
    logic [WIDE_DW-1:0] l;
    for (int i = 0; i < 16; i++) l[32*i +: 32] = 32'(a) + 32'(4 * i) ^ 32'hA5A5_0000;
    return l;
  endfunction

  always @(posedge clk) cyc <= cyc + 1;
  // refill memory: accepts after a random wait, answers after a random wait
  int wait_cnt = 0;
  logic busy = 0;
  logic [WIDE_AW-1:0] ra;
  always @(posedge clk) begin
    refill_rsp_valid <= 1'b0;
    if (refill_valid && refill_ready) begin
      busy <= 1; ra <= refill_req.addr; wait_cnt <= int'($urandom % 5);
      checks++;
      if (!refill_req.instr || refill_req.we) begin failures++; $display("FAIL refill not an instruction read"); end
    end else if (busy) begin
      if (wait_cnt == 0) begin busy <= 0; refill_rsp_valid <= 1'b1; refill_rsp.rdata <= line(ra); end
      else wait_cnt <= wait_cnt - 1;
    end
    if (miss) n_miss++;
  end
  always @(negedge clk) refill_ready <= !busy && ($urandom % 2 == 0);

  // requesters
  logic [NP-1:0] open_q;
  logic [NP-1:0][WIDE_AW-1:0] addr_q;
  int to_send = 3000;
  always @(posedge clk) begin
    for (int p = 0; p < NP; p++) begin
      if (rsp_valid[p]) begin
        checks++; n_rsp++;
        if (!open_q[p] || rsp_data !== line(addr_q[p])) begin failures++; $display("FAIL port %0d line %h", p, addr_q[p]); end
        open_q[p] <= 1'b0;
      end
      if (req_valid[p] && req_ready[p]) begin open_q[p] <= 1'b1; addr_q[p] <= req_addr[p]; req_valid[p] <= 1'b0; end
    end
  end
  always @(negedge clk) begin
    for (int p = 0; p < NP; p++) begin
      if (!req_valid[p] && !open_q[p] && to_send > 0 && $urandom % 3 == 0) begin
        req_valid[p] <= 1'b1;
        req_addr[p]  <= WIDE_AW'(48'h8000_0000 + 64 * ($urandom % 256));  // 16 KiB range
        to_send--;
      end
    end
  end

  initial begin
    int t0;
    req_valid = '0; open_q = '0; req_addr = '0; refill_rsp = '0; refill_rsp_valid = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (to_send == 0 && open_q == '0 && req_valid == '0);
    repeat (20) @(posedge clk);
    checks++;
    if (n_rsp < 2990 || n_miss == 0 || n_miss > 2900) begin
      failures++; $display("FAIL %0d responses, %0d misses", n_rsp, n_miss);
    end
    // single hit: ask port 0 for a line just fetched, twice
    @(negedge clk); req_valid[0] = 1; req_addr[0] = 48'h8000_0000;
    @(posedge clk);
    wait (rsp_valid[0]); @(negedge clk);
    req_valid[0] = 1; t0 = cyc;
    @(posedge clk);
    @(posedge clk); #1;
    checks++;
    if (!rsp_valid[0]) begin failures++; $display("FAIL hit did not answer on the next cycle"); end
    repeat (3) @(posedge clk);
    $display("misses %0d of %0d lookups", n_miss, n_rsp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
