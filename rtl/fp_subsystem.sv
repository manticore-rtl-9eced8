// fp_subsystem: the FPU subsystem of a core complex. It receives FP
// instructions from the FPU sequencer, reads their operands from the 32 x 64
// bit FP register file or, when stream semantics are enabled, from the SSR
// streams behind ft0/ft1, and issues them in order to the FPU or to its
// load/store port.
//
// Supported instructions (a subset of RV32D plus packed single precision):
// fld, fsd, fmadd, fadd, fsub, fmul, fsgnj/fsgnjn/fsgnjx (fmv.d). The
// format field selects binary64 (fmt=01) or two packed binary32 lanes
// (fmt=00). The address of fld/fsd comes from the integer core in the
// offload's operand field. Anything else is consumed and ignored.
//
// Hazards are handled with a scoreboard: an instruction waits while one of
// its source or destination registers has a result pending, while a stream
// it reads is empty, or while the stream it writes is busy (at most one
// value in flight per write stream). With the FPU latency of 3 cycles, four
// independent accumulations, as in the paper's unrolled example, issue
// back to back. Results of the FPU and of loads write the register file
// through two write ports; stores complete when granted.
// The paper names this block and says what SSRs do; its internals here are
// this design's own.
module fp_subsystem
  import manticore_pkg::*;
#(
  parameter int unsigned FPU_LATENCY = 3
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             in_valid_i,
  output logic             in_ready_o,
  input  offload_t         in_i,
  // load/store port to the TCDM
  output logic             lsu_valid_o,
  output tcdm_req_t        lsu_req_o,
  input  logic             lsu_gnt_i,
  input  logic             lsu_rvalid_i,
  input  logic [63:0]      lsu_rdata_i,
  // stream registers
  input  logic             ssr_en_i,
  input  logic [1:0][63:0] ssr_rdata_i,
  input  logic [1:0]       ssr_rvalid_i,
  output logic [1:0]       ssr_pop_o,
  output logic [1:0][63:0] ssr_wdata_o,
  output logic [1:0]       ssr_push_o,
  input  logic [1:0]       ssr_wready_i,
  output logic             idle_o,
  output logic             fpu_busy_o     // an FPU operation issued this cycle
);
  logic [63:0] rf_q [32];
  logic [31:0] pend_q;
  logic [1:0]  wpend_q;
  logic        ld_out_q;
  logic [4:0]  ld_rd_q;

  // ---------------- decode ----------------
  logic [6:0] opc;
  logic [4:0] rd, rs1, rs2, rs3, f5;
  logic [2:0] f3;
  logic       is_ld, is_st, is_fpu, simd, use1, use2, use3, neg_c;
  fpu_op_e    op;

  always_comb begin
    opc = in_i.instr[6:0];
    rd  = in_i.instr[11:7];
    rs1 = in_i.instr[19:15];
    rs2 = in_i.instr[24:20];
    rs3 = in_i.instr[31:27];
    f5  = in_i.instr[31:27];
    f3  = in_i.instr[14:12];
    simd = (in_i.instr[26:25] == 2'b00);
    is_ld = (opc == OPC_LOAD_FP) && (f3 == 3'b011);
    is_st = (opc == OPC_STORE_FP) && (f3 == 3'b011);
    is_fpu = 1'b0; use1 = 1'b0; use2 = 1'b0; use3 = 1'b0; neg_c = 1'b0;
    op = FOP_FMADD;
    if (opc == OPC_FMADD) begin
      is_fpu = 1'b1; use1 = 1'b1; use2 = 1'b1; use3 = 1'b1;
    end else if (opc == OPC_OP_FP) begin
      use1 = 1'b1; use2 = 1'b1; is_fpu = 1'b1;
      unique case (f5)
        5'b00000: op = FOP_ADD;
        5'b00001: begin op = FOP_ADD; neg_c = 1'b1; end
        5'b00010: op = FOP_MUL;
        5'b00100: op = (f3 == 3'b000) ? FOP_SGNJ : (f3 == 3'b001) ? FOP_SGNJN : FOP_SGNJX;
        default:  begin is_fpu = 1'b0; use1 = 1'b0; use2 = 1'b0; end
      endcase
    end
    if (is_st) use2 = 1'b1;
  end

  // ---------------- operands ----------------
  function automatic logic is_ssr(logic [4:0] r, logic en);
    return en && (r[4:1] == 4'd0);
  endfunction

  logic        src_ok, rd_ok, ssr_dst, can_issue, mem_op;
  logic [63:0] va, vb, vc;
  logic [1:0]  pop;

  always_comb begin
    src_ok = 1'b1;
    pop = '0;
    if (use1) begin
      if (is_ssr(rs1, ssr_en_i)) begin src_ok &= ssr_rvalid_i[rs1[0]]; pop[rs1[0]] = 1'b1; end
      else src_ok &= !pend_q[rs1];
    end
    if (use2) begin
      if (is_ssr(rs2, ssr_en_i)) begin src_ok &= ssr_rvalid_i[rs2[0]]; pop[rs2[0]] = 1'b1; end
      else src_ok &= !pend_q[rs2];
    end
    if (use3) begin
      if (is_ssr(rs3, ssr_en_i)) begin src_ok &= ssr_rvalid_i[rs3[0]]; pop[rs3[0]] = 1'b1; end
      else src_ok &= !pend_q[rs3];
    end
    va = is_ssr(rs1, ssr_en_i) ? ssr_rdata_i[rs1[0]] : rf_q[rs1];
    vb = is_ssr(rs2, ssr_en_i) ? ssr_rdata_i[rs2[0]] : rf_q[rs2];
    vc = is_ssr(rs3, ssr_en_i) ? ssr_rdata_i[rs3[0]] : rf_q[rs3];
    if (opc == OPC_OP_FP) vc = vb;  // fadd/fsub: a + c
    if (neg_c) vc[simd ? 31 : 63] = ~vc[simd ? 31 : 63];
    if (neg_c && simd) vc[63] = ~vc[63];
    ssr_dst = is_fpu && is_ssr(rd, ssr_en_i);
    if (ssr_dst)     rd_ok = ssr_wready_i[rd[0]] && !wpend_q[rd[0]];
    else if (is_st)  rd_ok = 1'b1;
    else             rd_ok = !pend_q[rd];
    mem_op = is_ld || is_st;
  end

  // the grant feeds back only into the issue decision
  assign lsu_valid_o = in_valid_i && mem_op && src_ok && rd_ok && !ld_out_q;
  assign can_issue   = in_valid_i && src_ok && rd_ok && (mem_op ? (lsu_valid_o && lsu_gnt_i) : 1'b1);
  assign in_ready_o  = can_issue || (in_valid_i && !mem_op && !is_fpu);
  assign ssr_pop_o   = can_issue ? pop : 2'b00;

  assign lsu_req_o.addr  = in_i.op;
  assign lsu_req_o.we    = is_st;
  assign lsu_req_o.wdata = vb;
  assign lsu_req_o.strb  = '1;

  // ---------------- FPU ----------------
  logic        fpu_valid;
  logic [63:0] fpu_res;
  logic [4:0]  fpu_rd;

  fpu #(.LATENCY(FPU_LATENCY)) i_fpu (
    .clk_i, .rst_ni,
    .in_valid_i (can_issue && is_fpu),
    .op_i       (op),
    .simd_i     (simd),
    .a_i        (va),
    .b_i        (vb),
    .c_i        (vc),
    .rd_i       (rd),
    .out_valid_o(fpu_valid),
    .res_o      (fpu_res),
    .rd_o       (fpu_rd)
  );
  assign fpu_busy_o = can_issue && is_fpu;

  logic wb_ssr;
  assign wb_ssr = fpu_valid && (fpu_rd[4:1] == 4'd0) && wpend_q[fpu_rd[0]];
  always_comb begin
    ssr_push_o  = '0;
    ssr_wdata_o = {fpu_res, fpu_res};
    if (wb_ssr) ssr_push_o[fpu_rd[0]] = 1'b1;
  end

  // ---------------- state ----------------
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pend_q   <= '0;
      wpend_q  <= '0;
      ld_out_q <= 1'b0;
      ld_rd_q  <= '0;
    end else begin
      logic [31:0] pend_n;
      logic [1:0]  wpend_n;
      pend_n  = pend_q;
      wpend_n = wpend_q;
      if (fpu_valid) begin
        if (wb_ssr) wpend_n[fpu_rd[0]] = 1'b0;
        else        pend_n[fpu_rd] = 1'b0;
      end
      if (lsu_rvalid_i && ld_out_q) pend_n[ld_rd_q] = 1'b0;
      if (can_issue && is_fpu) begin
        if (ssr_dst) wpend_n[rd[0]] = 1'b1;
        else         pend_n[rd] = 1'b1;
      end
      if (can_issue && is_ld) pend_n[rd] = 1'b1;
      pend_q  <= pend_n;
      wpend_q <= wpend_n;
      if (can_issue && is_ld) begin
        ld_out_q <= 1'b1;
        ld_rd_q  <= rd;
      end else if (lsu_rvalid_i) begin
        ld_out_q <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk_i) begin
    if (fpu_valid && !wb_ssr) rf_q[fpu_rd] <= fpu_res;
    if (lsu_rvalid_i && ld_out_q) rf_q[ld_rd_q] <= lsu_rdata_i;
  end

  assign idle_o = (pend_q == '0) && (wpend_q == '0) && !ld_out_q && !in_valid_i;

  // the two write ports never target the same register
  assert property (@(posedge clk_i) disable iff (!rst_ni)
    (fpu_valid && !wb_ssr && lsu_rvalid_i && ld_out_q) |-> (fpu_rd != ld_rd_q));

endmodule
