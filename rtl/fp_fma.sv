// fp_fma: combinational fused multiply-add, res = a*b + c, for one IEEE-754
// binary format (default binary64; EXP_W=8, MAN_W=23 gives binary32).
//
// How it works: the exact product of the two significands (2M bits, M =
// MAN_W+1) is placed in a window of 3M+5 bits; the addend significand starts
// at the top of the window and is shifted right by the exponent difference,
// with the bits shifted out collapsed into a sticky bit. If the addend is so
// large that the product lies wholly below it, the product collapses into the
// sticky bit instead. The two are added or subtracted, the magnitude is
// normalised with a leading-zero count, and the result is rounded once,
// to nearest even. That single rounding is what makes the operation fused.
//
// Own choices (the paper only says the FPU computes one DP FMA or two SP FMAs
// per cycle): round-to-nearest-even only, subnormal inputs and outputs are
// flushed to zero, every NaN result is the canonical quiet NaN, no exception
// flags. Purely combinational; the fpu module adds the pipeline registers.
module fp_fma #(
  parameter int unsigned EXP_W = 11,
  parameter int unsigned MAN_W = 52
) (
  input  logic [EXP_W+MAN_W:0] a_i,
  input  logic [EXP_W+MAN_W:0] b_i,
  input  logic [EXP_W+MAN_W:0] c_i,
  output logic [EXP_W+MAN_W:0] res_o
);
  localparam int unsigned M    = MAN_W + 1;      // significand width
  localparam int unsigned WX   = 3*M + 5;        // window incl. sticky and carry bit
  localparam int          BIAS = (1 << (EXP_W-1)) - 1;
  localparam int          EMAX = (1 << EXP_W) - 1;

  logic             sa, sb, sc, sp;
  logic [EXP_W-1:0] ea, eb, ec;
  logic [M-1:0]     ma, mb, mc;
  logic             a_zero, b_zero, c_zero, a_inf, b_inf, c_inf, any_nan;
  logic [2*M-1:0]   prod;
  logic [WX-1:0]    p_ext, c_top, c_ext, sum, norm;
  logic [2*WX-1:0]  c_shift;
  logic             res_sign, sub, rnd_inc, g_bit, st_bit;
  logic [M:0]       mant_r;
  logic signed [31:0] d, sh, lz, e_res, ep_b;

  always_comb begin
    sa = a_i[EXP_W+MAN_W]; ea = a_i[MAN_W +: EXP_W];
    sb = b_i[EXP_W+MAN_W]; eb = b_i[MAN_W +: EXP_W];
    sc = c_i[EXP_W+MAN_W]; ec = c_i[MAN_W +: EXP_W];
    a_zero = (ea == '0); b_zero = (eb == '0); c_zero = (ec == '0);
    a_inf  = (int'(ea) == EMAX) && (a_i[MAN_W-1:0] == '0);
    b_inf  = (int'(eb) == EMAX) && (b_i[MAN_W-1:0] == '0);
    c_inf  = (int'(ec) == EMAX) && (c_i[MAN_W-1:0] == '0);
    any_nan = ((int'(ea) == EMAX) && (a_i[MAN_W-1:0] != '0)) ||
              ((int'(eb) == EMAX) && (b_i[MAN_W-1:0] != '0)) ||
              ((int'(ec) == EMAX) && (c_i[MAN_W-1:0] != '0));
    ma = a_zero ? '0 : {1'b1, a_i[MAN_W-1:0]};
    mb = b_zero ? '0 : {1'b1, b_i[MAN_W-1:0]};
    mc = c_zero ? '0 : {1'b1, c_i[MAN_W-1:0]};
    sp  = sa ^ sb;
    sub = sp ^ sc;
    prod = ma * mb;

    // exponent difference between addend and product (biased product exponent)
    ep_b = int'(ea) + int'(eb) - BIAS;
    d  = int'(ec) - ep_b;
    sh = int'(M) + 2 - d;

    // product window: product LSB at bit 3 (bit 0 sticky, bits 1-2 guard)
    p_ext = WX'(prod) << 3;
    // addend at the top of the window below the carry bit
    c_top = WX'(mc) << (WX - 1 - M);
    if (sh < 0) begin
      // addend far above the product: product only contributes a sticky bit
      sh    = 0;
      ep_b  = int'(ec) - int'(M) - 2;  // window now anchored on the addend
      p_ext = WX'(prod != '0);
    end
    if (sh > int'(WX)) sh = int'(WX);
    c_shift = {c_top, {WX{1'b0}}} >> sh;
    c_ext   = c_shift[2*WX-1:WX] | WX'(c_shift[WX-1:0] != '0);

    if (!sub) begin
      sum = p_ext + c_ext;
      res_sign = sp;
    end else if (p_ext >= c_ext) begin
      sum = p_ext - c_ext;
      res_sign = sp;
    end else begin
      sum = c_ext - p_ext;
      res_sign = sc;
    end

    // leading-zero count and normalisation
    lz = int'(WX);
    for (int i = 0; i < int'(WX); i++) begin
      if (sum[i]) lz = int'(WX) - 1 - i;
    end
    norm = sum << lz;
    g_bit  = norm[WX-1-M];
    st_bit = (norm[WX-2-M:0] != '0);
    rnd_inc = g_bit & (st_bit | norm[WX-M]);
    mant_r = {1'b0, norm[WX-1 -: M]} + (M+1)'(rnd_inc);
    // weight of the window's top bit gives the exponent
    e_res = ep_b + int'(M) + 3 - lz;
    if (mant_r[M]) begin
      mant_r = mant_r >> 1;
      e_res  = e_res + 1;
    end

    // result selection
    if (any_nan || ((a_inf || b_inf) && (a_zero || b_zero)) ||
        ((a_inf || b_inf) && c_inf && sub)) begin
      res_o = {1'b0, {EXP_W{1'b1}}, 1'b1, {(MAN_W-1){1'b0}}};
    end else if (a_inf || b_inf) begin
      res_o = {sp, {EXP_W{1'b1}}, {MAN_W{1'b0}}};
    end else if (c_inf) begin
      res_o = {sc, {EXP_W{1'b1}}, {MAN_W{1'b0}}};
    end else if (a_zero || b_zero) begin
      // product is exactly zero: the result is the addend
      if (c_zero) res_o = {sp & sc, {(EXP_W+MAN_W){1'b0}}};
      else        res_o = c_i;
    end else if (sum == '0) begin
      res_o = '0;  // exact cancellation gives +0 when rounding to nearest
    end else if (e_res >= EMAX) begin
      res_o = {res_sign, {EXP_W{1'b1}}, {MAN_W{1'b0}}};
    end else if (e_res <= 0) begin
      res_o = {res_sign, {(EXP_W+MAN_W){1'b0}}};  // flush to zero
    end else begin
      res_o = {res_sign, EXP_W'(e_res), mant_r[MAN_W-1:0]};
    end
  end

endmodule
