// tb_tcdm: sixteen narrow ports and the DMA port issue random reads and
// writes (random strobes) into a small region so that bank conflicts are
// frequent. A reference memory is updated at every grant; every read must
// return the reference contents at the time of its grant, one cycle later.
// Also checked: conflicts occur and are counted, a waiting port is served
// within NUM_PORTS grants of its bank (round-robin fairness), and sixteen
// ports on sixteen different banks are all granted in the same cycle.
module tb_tcdm;
  import manticore_pkg::*;
  localparam int NP = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NP-1:0] valid, gnt, rvalid;
  tcdm_req_t [NP-1:0] req;
  logic [NP-1:0][63:0] rdata;
  logic dma_valid, dma_we, dma_gnt, dma_rvalid;
  logic [31:0] dma_addr;
  logic [WIDE_DW-1:0] dma_wdata, dma_rdata;
  logic [WIDE_SW-1:0] dma_strb;
  logic [4:0] conflicts;
  int checks = 0, failures = 0, n_conf = 0, cyc = 0, mode = 0;
  logic [63:0] ref_mem [logic [31:0]];
  logic [63:0] exp_rd [NP];
  logic [WIDE_DW-1:0] exp_dma;
  int wait_cnt [NP];

  tcdm dut (.clk_i(clk), .rst_ni(rst_n), .req_valid_i(valid), .req_i(req), .gnt_o(gnt), .rvalid_o(rvalid),
    .rdata_o(rdata), .dma_valid_i(dma_valid), .dma_addr_i(dma_addr), .dma_we_i(dma_we), .dma_wdata_i(dma_wdata),
    .dma_strb_i(dma_strb), .dma_gnt_o(dma_gnt), .dma_rvalid_o(dma_rvalid), .dma_rdata_o(dma_rdata),
    .conflicts_o(conflicts));

  function automatic logic [63:0] rd_ref(logic [31:0] a);
    return ref_mem.exists(a) ? ref_mem[a] : 64'h0;
  endfunction
  function automatic logic [63:0] merge(logic [63:0] o, logic [63:0] n, logic [7:0] s);
    for (int i = 0; i < 8; i++) if (s[i]) o[8*i +: 8] = n[8*i +: 8];
    return o;
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    // check read data of last cycle's grants
    for (int p = 0; p < NP; p++) if (rvalid[p]) begin
      checks++;
      if (rdata[p] !== exp_rd[p]) begin failures++; $display("FAIL port %0d read %h exp %h", p, rdata[p], exp_rd[p]); end
    end
    if (dma_rvalid) begin
      checks++;
      if (dma_rdata !== exp_dma) begin failures++; $display("FAIL dma read"); end
    end
    n_conf += int'(conflicts);
    // capture this cycle's grants into the reference
    if (dma_valid && dma_gnt) begin
      for (int i = 0; i < 8; i++) begin
        logic [31:0] a;
        a = dma_addr + 32'(8 * i);
        if (dma_we) ref_mem[a] = merge(rd_ref(a), dma_wdata[64*i +: 64], dma_strb[8*i +: 8]);
        else exp_dma[64*i +: 64] = rd_ref(a);
      end
    end
    for (int p = 0; p < NP; p++) begin
      if (valid[p] && gnt[p]) begin
        if (req[p].we) ref_mem[req[p].addr] = merge(rd_ref(req[p].addr), req[p].wdata, req[p].strb);
        else exp_rd[p] = rd_ref(req[p].addr);
        wait_cnt[p] = 0;
      end else if (valid[p]) begin
        wait_cnt[p]++;
        if (wait_cnt[p] > 2 * NP + 8) begin failures++; $display("FAIL port %0d starved", p); wait_cnt[p] = 0; end
      end
    end
  end

  // stimulus: hold a request until it is granted
  always @(negedge clk) begin
    if (mode == 0) begin
      for (int p = 0; p < NP; p++) begin
        if (!valid[p] || gnt[p]) begin
          valid[p] <= $urandom % 3 != 0;
          req[p].addr  <= 32'h1000_0000 + 32'(8 * ($urandom % 128));
          req[p].we    <= $urandom % 2;
          req[p].wdata <= {$urandom, $urandom};
          req[p].strb  <= 8'($urandom);
        end
      end
      if (!dma_valid || dma_gnt) begin
        dma_valid <= $urandom % 8 == 0;
        dma_addr  <= 32'h1000_0000 + 32'(64 * ($urandom % 16));
        dma_we    <= $urandom % 2;
        dma_wdata <= {16{$urandom}};
        dma_strb  <= {$urandom, $urandom};
      end
    end
  end

  initial begin
    valid = '0; req = '0; dma_valid = 0; dma_addr = 0; dma_we = 0; dma_wdata = 0; dma_strb = 0;
    foreach (wait_cnt[p]) wait_cnt[p] = 0;
    mode = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // initialise the test region with full-strobe DMA writes
    for (int l = 0; l < 16; l++) begin
      @(negedge clk);
      dma_valid = 1; dma_we = 1; dma_addr = 32'h1000_0000 + 32'(64 * l);
      dma_wdata = {16{$urandom}}; dma_strb = '1;
    end
    @(negedge clk); dma_valid = 0;
    mode = 0;
    repeat (5000) @(posedge clk);
    @(negedge clk);
    mode = 1; valid = '0; dma_valid = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (n_conf == 0) begin failures++; $display("FAIL no bank conflicts seen"); end
    // all sixteen ports on distinct banks
    @(negedge clk);
    for (int p = 0; p < NP; p++) begin
      valid[p] = 1; req[p].we = 0; req[p].addr = 32'h1000_0000 + 32'(8 * (2 * p + 1));
    end
    #1;
    checks++;
    if (gnt != '1) begin failures++; $display("FAIL distinct banks not all granted: %b", gnt); end
    @(posedge clk); @(negedge clk); valid = '0;
    repeat (3) @(posedge clk);
    $display("conflict stalls: %0d", n_conf);
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
