// snitch_core: the single-stage, in-order RV32I integer core of a core
// complex. Fetch, decode, execute and write-back happen in one cycle: the
// core presents its PC to the L0 instruction cache, which answers in the
// same cycle on a hit, and the instruction retires in that cycle unless it
// has to wait.
//
// FP instructions (load/store-FP, fmadd, OP-FP) and the custom frep
// instruction are not executed here. They are offloaded, with one integer
// operand, to the FPU sequencer through a valid/ready port, and the core
// continues with the next instruction as soon as the offload is accepted.
// The operand is the rs1 value (frep: iteration count) or, for fld/fsd, the
// effective address rs1+imm. The FP side therefore runs decoupled from the
// integer pipeline, which is what lets FREP loops overlap with integer
// bookkeeping.
//
// Data accesses use a request/grant port; a load holds the core until its
// data returns (one cycle after the grant), a store retires when granted.
// Waits: instruction miss, offload not accepted, memory grant or load data,
// and fence, which waits until the FP subsystem is idle so that FP stores are
// in memory before later integer work. ecall/ebreak stop the core (halted_o).
// The paper gives the core's class (32-bit RISC-V, single stage, 22 kGE);
// the ISA subset (RV32I, mhartid only, no interrupts), fence and halt
// behaviour are this design's choices.
module snitch_core
  import manticore_pkg::*;
#(
  parameter logic [31:0] BOOT_PC = BOOT_ADDR
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic [31:0] hart_id_i,
  input  logic        fetch_en_i,
  // instruction fetch (same-cycle answer)
  output logic        imem_valid_o,
  output logic [31:0] imem_addr_o,
  input  logic        imem_ready_i,
  input  logic [31:0] imem_data_i,
  // data port
  output logic        dmem_valid_o,
  output logic [31:0] dmem_addr_o,
  output logic        dmem_we_o,
  output logic [31:0] dmem_wdata_o,
  output logic [3:0]  dmem_strb_o,
  input  logic        dmem_gnt_i,
  input  logic        dmem_rvalid_i,
  input  logic [31:0] dmem_rdata_i,
  // FP offload
  output logic        acc_valid_o,
  output offload_t    acc_o,
  input  logic        acc_ready_i,
  input  logic        fp_idle_i,
  output logic        halted_o,
  output logic        retire_o
);
  logic [31:0] pc_q, rf_q [32];
  logic        halted_q, ld_wait_q, started_q;

  logic [31:0] ins;
  logic [6:0]  opc;
  logic [4:0]  rd, rs1, rs2;
  logic [2:0]  f3;
  logic [6:0]  f7;
  logic [31:0] a, b, imm_i, imm_s, imm_b, imm_u, imm_j, npc, wb, ld_val;
  logic        wr, stall, take, is_fp, is_ld, is_st;

  assign ins = imem_data_i;
  assign opc = ins[6:0];
  assign rd  = ins[11:7];
  assign rs1 = ins[19:15];
  assign rs2 = ins[24:20];
  assign f3  = ins[14:12];
  assign f7  = ins[31:25];
  assign a   = (rs1 == 0) ? 32'd0 : rf_q[rs1];
  assign b   = (rs2 == 0) ? 32'd0 : rf_q[rs2];
  assign imm_i = {{20{ins[31]}}, ins[31:20]};
  assign imm_s = {{20{ins[31]}}, ins[31:25], ins[11:7]};
  assign imm_b = {{19{ins[31]}}, ins[31], ins[7], ins[30:25], ins[11:8], 1'b0};
  assign imm_u = {ins[31:12], 12'd0};
  assign imm_j = {{11{ins[31]}}, ins[31], ins[19:12], ins[20], ins[30:21], 1'b0};

  assign is_fp = opc inside {OPC_LOAD_FP, OPC_STORE_FP, OPC_FMADD, OPC_OP_FP, OPC_FREP};
  assign is_ld = (opc == 7'b0000011);
  assign is_st = (opc == 7'b0100011);

  function automatic logic [31:0] alu_op(logic [2:0] fn, logic alt, logic [31:0] x, logic [31:0] y);
    unique case (fn)
      3'b000: return alt ? x - y : x + y;
      3'b001: return x << y[4:0];
      3'b010: return {31'd0, $signed(x) < $signed(y)};
      3'b011: return {31'd0, x < y};
      3'b100: return x ^ y;
      3'b101: return alt ? 32'($signed(x) >>> y[4:0]) : x >> y[4:0];
      3'b110: return x | y;
      default: return x & y;
    endcase
  endfunction

  // load data alignment
  always_comb begin
    logic [31:0] sh;
    sh = dmem_rdata_i >> (8 * dmem_addr_o[1:0]);
    unique case (f3)
      3'b000:  ld_val = {{24{sh[7]}}, sh[7:0]};
      3'b001:  ld_val = {{16{sh[15]}}, sh[15:0]};
      3'b100:  ld_val = {24'd0, sh[7:0]};
      3'b101:  ld_val = {16'd0, sh[15:0]};
      default: ld_val = sh;
    endcase
  end

  always_comb begin
    npc = pc_q + 32'd4;
    wr = 1'b0;
    wb = '0;
    stall = 1'b0;
    take = 1'b0;
    unique case (opc)
      7'b0110111: begin wr = 1'b1; wb = imm_u; end                        // lui
      7'b0010111: begin wr = 1'b1; wb = pc_q + imm_u; end                 // auipc
      7'b1101111: begin wr = 1'b1; wb = npc; npc = pc_q + imm_j; end      // jal
      7'b1100111: begin wr = 1'b1; wb = npc; npc = (a + imm_i) & ~32'd1; end  // jalr
      7'b1100011: begin                                                    // branches
        unique case (f3)
          3'b000:  take = (a == b);
          3'b001:  take = (a != b);
          3'b100:  take = ($signed(a) < $signed(b));
          3'b101:  take = ($signed(a) >= $signed(b));
          3'b110:  take = (a < b);
          default: take = (a >= b);
        endcase
        if (take) npc = pc_q + imm_b;
      end
      7'b0010011: begin wr = 1'b1; wb = alu_op(f3, f3 == 3'b101 && f7[5], a, imm_i); end
      7'b0110011: begin wr = 1'b1; wb = alu_op(f3, f7[5], a, b); end
      7'b0000011: begin                                                    // loads
        stall = !dmem_rvalid_i || !ld_wait_q;
        wr = 1'b1; wb = ld_val;
      end
      7'b0100011: stall = !dmem_gnt_i;                                     // stores
      7'b0001111: stall = !fp_idle_i;                                      // fence
      7'b1110011: begin
        if (f3 == 3'b000) stall = 1'b1;                                    // ecall/ebreak: halt
        else begin wr = 1'b1; wb = (ins[31:20] == 12'hF14) ? hart_id_i : 32'd0; end
      end
      default: if (is_fp) stall = !acc_ready_i;
    endcase
    if (!imem_ready_i || halted_q || !started_q) stall = 1'b1;
  end

  // requests to the data port and to the FP side (kept apart from the stall
  // logic above, which depends on their grants)
  logic active;
  assign active = imem_ready_i && started_q && !halted_q;
  always_comb begin
    acc_valid_o  = active && is_fp;
    acc_o.instr  = ins;
    acc_o.op     = (opc == OPC_LOAD_FP) ? a + imm_i : (opc == OPC_STORE_FP) ? a + imm_s : a;
    dmem_valid_o = active && (is_st || (is_ld && !ld_wait_q));
    dmem_we_o    = is_st;
    dmem_addr_o  = a + (is_st ? imm_s : imm_i);
    dmem_wdata_o = b << (8 * dmem_addr_o[1:0]);
    unique case (f3[1:0])
      2'b00:   dmem_strb_o = 4'b0001 << dmem_addr_o[1:0];
      2'b01:   dmem_strb_o = 4'b0011 << dmem_addr_o[1:0];
      default: dmem_strb_o = 4'b1111;
    endcase
  end

  assign imem_valid_o = started_q && !halted_q;
  assign imem_addr_o  = pc_q;
  assign halted_o     = halted_q;
  assign retire_o     = !stall;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pc_q      <= BOOT_PC;
      halted_q  <= 1'b0;
      ld_wait_q <= 1'b0;
      started_q <= 1'b0;
    end else begin
      if (fetch_en_i) started_q <= 1'b1;
      if (started_q && !halted_q && imem_ready_i) begin
        if (opc == 7'b1110011 && f3 == 3'b000) halted_q <= 1'b1;
        if (is_ld) begin
          if (dmem_valid_o && dmem_gnt_i) ld_wait_q <= 1'b1;
          else if (dmem_rvalid_i)         ld_wait_q <= 1'b0;
        end
        if (!stall) pc_q <= npc;
      end
    end
  end

  always_ff @(posedge clk_i) begin
    if (!stall && wr && rd != 0) rf_q[rd] <= wb;
  end

  // a load's data arrives only while the core waits for it
  assert property (@(posedge clk_i) disable iff (!rst_ni) dmem_rvalid_i |-> ld_wait_q);

endmodule
