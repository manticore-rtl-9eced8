// tb_dma_engine: programs the DMA through its registers for transfers into
// the TCDM (global memory -> TCDM) and out of it, with random stalls on both
// sides, and checks the copied lines, the register read-back, BUSY and the
// DONE counter, and that a transfer of L bytes makes exactly L/64 requests
// on the wide bus (512 bits per beat).
module tb_dma_engine;
  import manticore_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic reg_valid, reg_we, m_valid, m_ready, m_rsp_valid, t_valid, t_we, t_gnt, t_rvalid, busy;
  logic [7:0] reg_addr;
  logic [31:0] reg_wdata, reg_rdata, t_addr;
  wide_req_t m_req;
  wide_rsp_t m_rsp;
  logic [WIDE_DW-1:0] t_wdata, t_rdata;
  logic [WIDE_SW-1:0] t_strb;
  logic [WIDE_DW-1:0] tmem [logic [31:0]];
  int checks = 0, failures = 0;

  dma_engine dut (.clk_i(clk), .rst_ni(rst_n), .reg_valid_i(reg_valid), .reg_we_i(reg_we), .reg_addr_i(reg_addr),
    .reg_wdata_i(reg_wdata), .reg_rdata_o(reg_rdata), .m_valid_o(m_valid), .m_req_o(m_req), .m_ready_i(m_ready),
    .m_rsp_valid_i(m_rsp_valid), .m_rsp_i(m_rsp), .t_valid_o(t_valid), .t_addr_o(t_addr), .t_we_o(t_we),
    .t_wdata_o(t_wdata), .t_strb_o(t_strb), .t_gnt_i(t_gnt), .t_rvalid_i(t_rvalid), .t_rdata_i(t_rdata), .busy_o(busy));
  wide_mem_model mem (.clk_i(clk), .valid_i(m_valid), .req_i(m_req), .ready_o(m_ready),
    .rsp_valid_o(m_rsp_valid), .rsp_o(m_rsp));

  always @(negedge clk) t_gnt <= $urandom % 3 != 0;
  always @(posedge clk) begin
    t_rvalid <= t_valid && t_gnt && !t_we;
    if (t_valid && t_gnt) begin
      if (t_we) tmem[t_addr] = t_wdata;
      else t_rdata <= tmem.exists(t_addr) ? tmem[t_addr] : '0;
    end
  end

  task automatic wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk); reg_valid = 1; reg_we = 1; reg_addr = a; reg_wdata = d;
    @(negedge clk); reg_valid = 0; reg_we = 0;
  endtask
  task automatic rd_check(logic [7:0] a, logic [31:0] e, string what);
    @(negedge clk); reg_addr = a; #1;
    checks++;
    if (reg_rdata !== e) begin failures++; $display("FAIL reg %s: %h exp %h", what, reg_rdata, e); end
  endtask
  function automatic logic [WIDE_DW-1:0] pat(int i, int salt);
    logic [WIDE_DW-1:0] l;
    for (int w = 0; w < 16; w++) l[32*w +: 32] = 32'(i * 1000 + w + salt * 77777);
    return l;
  endfunction

  initial begin
    int n0;
    reg_valid = 0; reg_we = 0; reg_addr = 0; reg_wdata = 0; t_rvalid = 0; t_rdata = 0;
    for (int i = 0; i < 16; i++) mem.write_line(48'h0001_8000_0000 + 48'(64 * i), pat(i, 1));
    repeat (2) @(posedge clk);
    rst_n = 1;
    // in: 1 KiB from a 48-bit global address into the TCDM
    wr(8'h00, 32'h8000_0000); wr(8'h04, 32'h0001);
    wr(8'h08, 32'h1000_0400); wr(8'h0C, 0);
    wr(8'h10, 1024);
    rd_check(8'h04, 32'h1, "src hi");
    rd_check(8'h10, 1024, "len");
    n0 = mem.n_req;
    wr(8'h14, 1);
    rd_check(8'h18, 1, "busy");
    wait (!busy);
    checks++;
    if (mem.n_req - n0 != 16) begin failures++; $display("FAIL %0d wide requests for 1 KiB", mem.n_req - n0); end
    for (int i = 0; i < 16; i++) begin
      checks++;
      if (!tmem.exists(32'h1000_0400 + 32'(64 * i)) || tmem[32'h1000_0400 + 32'(64 * i)] !== pat(i, 1)) begin
        failures++; $display("FAIL in line %0d", i);
      end
    end
    // out: 512 B of the TCDM to global memory
    for (int i = 0; i < 8; i++) tmem[32'h1000_2000 + 32'(64 * i)] = pat(i, 2);
    wr(8'h00, 32'h1000_2000); wr(8'h04, 0);
    wr(8'h08, 32'h9000_0000); wr(8'h0C, 0);
    wr(8'h10, 512);
    n0 = mem.n_req;
    wr(8'h14, 1);
    wait (!busy);
    checks++;
    if (mem.n_req - n0 != 8) begin failures++; $display("FAIL %0d wide requests for 512 B", mem.n_req - n0); end
    repeat (10) @(posedge clk);
    for (int i = 0; i < 8; i++) begin
      checks++;
      if (mem.read_line(48'h9000_0000 + 48'(64 * i)) !== pat(i, 2)) begin failures++; $display("FAIL out line %0d", i); end
    end
    rd_check(8'h1C, 2, "done count");
    rd_check(8'h18, 0, "idle");
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
