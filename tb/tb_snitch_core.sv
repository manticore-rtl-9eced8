// tb_snitch_core: runs small RV32I programs on the core with an instruction
// memory that misses at random, a data memory with random grant stalls and
// an offload sink with random back-pressure. Checks arithmetic, shifts,
// compares, branches, jal/jalr, byte/half/word loads and stores (by the values
// the program stores), the offloaded FP instructions and their operands
// (rs1 value, effective address for fld/fsd), fence waiting for the FP side,
// mhartid, and that a straight-line program retires one instruction per
// cycle when nothing stalls.
module tb_snitch_core;
  import manticore_pkg::*;
  import rv_asm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic imem_valid, imem_ready, dmem_valid, dmem_we, dmem_gnt, dmem_rvalid, acc_valid, acc_ready;
  logic fp_idle, halted, retire, fetch_en;
  logic [31:0] imem_addr, imem_data, dmem_addr, dmem_wdata, dmem_rdata;
  logic [3:0] dmem_strb;
  offload_t acc;
  int checks = 0, failures = 0, stall = 1, cyc = 0;
  logic [31:0] imem [1024];
  logic [31:0] dmem [logic [31:0]];
  offload_t offq [$];

  snitch_core dut (.clk_i(clk), .rst_ni(rst_n), .hart_id_i(32'd5), .fetch_en_i(fetch_en),
    .imem_valid_o(imem_valid), .imem_addr_o(imem_addr), .imem_ready_i(imem_ready), .imem_data_i(imem_data),
    .dmem_valid_o(dmem_valid), .dmem_addr_o(dmem_addr), .dmem_we_o(dmem_we), .dmem_wdata_o(dmem_wdata),
    .dmem_strb_o(dmem_strb), .dmem_gnt_i(dmem_gnt), .dmem_rvalid_i(dmem_rvalid), .dmem_rdata_i(dmem_rdata),
    .acc_valid_o(acc_valid), .acc_o(acc), .acc_ready_i(acc_ready), .fp_idle_i(fp_idle),
    .halted_o(halted), .retire_o(retire));

  logic miss;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) begin
    miss      <= stall ? ($urandom % 4 == 0) : 1'b0;
    dmem_gnt  <= stall ? ($urandom % 3 != 0) : 1'b1;
    acc_ready <= stall ? ($urandom % 2 == 0) : 1'b1;
  end
  assign imem_ready = imem_valid && !miss;
  assign imem_data  = imem[(imem_addr - BOOT_ADDR) >> 2];
  always @(posedge clk) begin
    dmem_rvalid <= dmem_valid && dmem_gnt && !dmem_we;
    if (dmem_valid && dmem_gnt) begin
      logic [31:0] w, wa;
      wa = {dmem_addr[31:2], 2'b00};
      w = dmem.exists(wa) ? dmem[wa] : 32'h0;
      if (dmem_we) begin
        for (int i = 0; i < 4; i++) if (dmem_strb[i]) w[8*i +: 8] = dmem_wdata[8*i +: 8];
        dmem[wa] = w;
      end else dmem_rdata <= w;
    end
    if (acc_valid && acc_ready) offq.push_back(acc);
  end

  int pc;
  task automatic emit(logic [31:0] ins); imem[pc] = ins; pc++; endtask
  task automatic expect_word(logic [31:0] a, logic [31:0] v, string what);
    checks++;
    if (!dmem.exists(a) || dmem[a] !== v) begin
      failures++; $display("FAIL %s: [%h]=%h exp %h", what, a, dmem.exists(a) ? dmem[a] : 32'hx, v);
    end
  endtask
  task automatic run();
    fetch_en = 1;
    wait (halted);
    @(posedge clk);
  endtask

  initial begin
    int t0;
    fetch_en = 0; fp_idle = 1; dmem_rdata = 0; dmem_rvalid = 0;
    foreach (imem[i]) imem[i] = ecall();
    pc = 0;
    // x10 = 0x1000_0000 (data base)
    emit(lui(10, 32'h10000));
    // sum 1..10 in x5
    emit(addi(5, 0, 0)); emit(addi(6, 0, 1)); emit(addi(7, 0, 11));
    emit(add(5, 5, 6)); emit(addi(6, 6, 1)); emit(bne(6, 7, -8));
    emit(sw(5, 10, 0));                         // [0] = 55
    emit(addi(8, 0, -7)); emit(slli(9, 8, 4));  // -112
    emit(sw(9, 10, 4));
    emit(sub(11, 5, 9)); emit(sw(11, 10, 8));   // 55+112 = 167
    emit(addi(12, 0, 32'h0AB)); emit(s_type(13, 12, 10, 0, 7'b0100011));  // sb 0xAB at +13
    emit(i_type(13, 10, 0, 14, 7'b0000011));    // lb x14 = sign-extended 0xAB
    emit(sw(14, 10, 16));
    emit(i_type(13, 10, 4, 15, 7'b0000011));    // lbu
    emit(sw(15, 10, 20));
    emit(lw(16, 10, 0)); emit(addi(16, 16, 1)); emit(sw(16, 10, 24));   // 56
    emit(i_type(3, 8, 2, 17, 7'b0010011));      // slti x17 = (-7 < 3)
    emit(i_type(3, 8, 3, 18, 7'b0010011));      // sltiu x18 = (0xFFFFFFF9 < 3) = 0
    emit(slli(17, 17, 1)); emit(add(17, 17, 18)); emit(sw(17, 10, 28));  // 2
    emit(jal(1, 8)); emit(addi(19, 0, 99));     // skipped
    emit(addi(19, 0, 42)); emit(sw(19, 10, 32));
    emit(blt(8, 0, 8)); emit(addi(20, 0, 1));   // taken, skip
    emit(csrr(21, 12'hF14)); emit(sw(21, 10, 36));
    // offloads: frep with x7 (=11) iterations, fld/fsd with addresses
    emit(frep(7, 3));
    emit(fld(2, 10, 64));
    emit(fsd(2, 10, -8));
    emit(fmadd_d(3, 2, 2, 2));
    emit(fence());
    emit(ecall());
    repeat (2) @(posedge clk);
    rst_n = 1;
    fork
      begin   // hold fp_idle low for a while after the offloads, fence must wait
        wait (offq.size() == 4);
        fp_idle = 0;
        repeat (20) @(posedge clk);
        fp_idle = 1;
      end
    join_none
    run();
    expect_word(32'h1000_0000, 55, "loop sum");
    expect_word(32'h1000_0004, 32'hFFFF_FF90, "slli");
    expect_word(32'h1000_0008, 167, "sub");
    expect_word(32'h1000_0010, 32'hFFFF_FFAB, "lb");
    expect_word(32'h1000_0014, 32'h0000_00AB, "lbu");
    expect_word(32'h1000_0018, 56, "lw");
    expect_word(32'h1000_001C, 2, "slti/sltiu");
    expect_word(32'h1000_0020, 42, "jal");
    expect_word(32'h1000_0024, 5, "mhartid");
    checks++;
    if (offq.size() != 4 || offq[0].op != 11 || offq[0].instr != frep(7, 3) || offq[1].op != 32'h1000_0040 ||
        offq[2].op != 32'h0FFF_FFF8 || offq[3].instr != fmadd_d(3, 2, 2, 2)) begin
      failures++; $display("FAIL offload stream (%0d entries)", offq.size());
    end
    // straight-line throughput: 100 addi without stalls
    stall = 0;
    rst_n = 0; fetch_en = 0;
    pc = 0;
    for (int i = 0; i < 100; i++) emit(addi(5, 5, 1));
    emit(sw(5, 10, 40)); emit(ecall());
    imem[0] = lui(10, 32'h10000);
    imem[1] = addi(5, 0, 0);
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    t0 = cyc;
    run();
    expect_word(32'h1000_0028, 98, "straight line");
    checks++;
    if (cyc - t0 > 104) begin failures++; $display("FAIL 102 instructions took %0d cycles", cyc - t0); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // fence check: while fp_idle is low the core must not halt
  always @(posedge clk) if (rst_n && !fp_idle && halted) begin
    failures++; $display("FAIL halted past a fence while FP busy");
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
