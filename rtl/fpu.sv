// fpu: the floating-point datapath of one core complex. Each cycle it accepts
// one operation, either on one binary64 value or, with simd_i set, on two
// binary32 values packed into the low and high halves of the 64-bit operands.
// This gives the paper's "one DP FMA or two SP FMAs per cycle".
//
// Operations (fpu_op_e): FMADD a*b+c, ADD a+c, MUL a*b, and the sign
// injections SGNJ/SGNJN/SGNJX (fmv.d is SGNJ with a == b). ADD and MUL reuse
// the FMA with b = 1.0 or c = -0.0. Every operation takes exactly LATENCY
// cycles, so results leave in issue order and the register file needs one
// write port for the FPU. The FMA is computed in the first stage and carried
// through LATENCY-1 further registers, to be retimed by synthesis.
//
// Timing: in_valid_i in cycle t gives out_valid_o in cycle t+LATENCY with the
// destination tag rd_i copied to rd_o. No back-pressure.
// The pipeline depth of 3 is this design's choice; the paper only says that
// unrolling by four hides the FPU latency.
module fpu
  import manticore_pkg::*;
#(
  parameter int unsigned LATENCY = 3
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        in_valid_i,
  input  fpu_op_e     op_i,
  input  logic        simd_i,
  input  logic [63:0] a_i,
  input  logic [63:0] b_i,
  input  logic [63:0] c_i,
  input  logic [4:0]  rd_i,
  output logic        out_valid_o,
  output logic [63:0] res_o,
  output logic [4:0]  rd_o
);
  localparam logic [63:0] DP_ONE     = 64'h3FF0_0000_0000_0000;
  localparam logic [63:0] DP_NEGZERO = 64'h8000_0000_0000_0000;
  localparam logic [31:0] SP_ONE     = 32'h3F80_0000;
  localparam logic [31:0] SP_NEGZERO = 32'h8000_0000;

  logic [63:0] fb, fc, dp_res, sp_res, sgn_res, res_d;

  always_comb begin
    fb = b_i;
    fc = c_i;
    if (op_i == FOP_ADD) fb = simd_i ? {SP_ONE, SP_ONE} : DP_ONE;
    if (op_i == FOP_MUL) fc = simd_i ? {SP_NEGZERO, SP_NEGZERO} : DP_NEGZERO;
  end

  fp_fma #(.EXP_W(11), .MAN_W(52)) i_dp (.a_i(a_i), .b_i(fb), .c_i(fc), .res_o(dp_res));
  for (genvar l = 0; l < 2; l++) begin : g_sp
    fp_fma #(.EXP_W(8), .MAN_W(23)) i_sp (
      .a_i(a_i[32*l +: 32]), .b_i(fb[32*l +: 32]), .c_i(fc[32*l +: 32]),
      .res_o(sp_res[32*l +: 32]));
  end

  // sign injection, per lane
  always_comb begin
    sgn_res = a_i;
    for (int l = 0; l < 2; l++) begin
      logic signed [31:0] msb;
      msb = simd_i ? 32*l + 31 : 63;
      unique case (op_i)
        FOP_SGNJ:  sgn_res[msb] = b_i[msb];
        FOP_SGNJN: sgn_res[msb] = ~b_i[msb];
        FOP_SGNJX: sgn_res[msb] = a_i[msb] ^ b_i[msb];
        default:   ;
      endcase
    end
  end

  always_comb begin
    if (op_i inside {FOP_SGNJ, FOP_SGNJN, FOP_SGNJX}) res_d = sgn_res;
    else res_d = simd_i ? sp_res : dp_res;
  end

  logic [LATENCY-1:0]        vld_q;
  logic [LATENCY-1:0][63:0]  res_q;
  logic [LATENCY-1:0][4:0]   rd_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      vld_q <= '0;
      res_q <= '0;
      rd_q  <= '0;
    end else begin
      vld_q[0] <= in_valid_i;
      res_q[0] <= res_d;
      rd_q[0]  <= rd_i;
      for (int s = 1; s < int'(LATENCY); s++) begin
        vld_q[s] <= vld_q[s-1];
        res_q[s] <= res_q[s-1];
        rd_q[s]  <= rd_q[s-1];
      end
    end
  end

  assign out_valid_o = vld_q[LATENCY-1];
  assign res_o       = res_q[LATENCY-1];
  assign rd_o        = rd_q[LATENCY-1];

endmodule
