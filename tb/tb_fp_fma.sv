// tb_fp_fma: checks the binary64 and binary32 fused multiply-add against the
// simulator's own double arithmetic. Operands are drawn so that a*b is exact
// in binary64 (significands of at most 26 bits), so the reference a*b+c has a
// single rounding, exactly like a fused operation. binary32 cases use small
// significands so that the exact result is representable. Special values
// (zeros, infinities, NaN, exact cancellation) are checked by bit pattern.
module tb_fp_fma;
  logic [63:0] a, b, c, r;
  logic [31:0] sa, sb, sc, sr;
  int checks = 0, failures = 0;

  fp_fma #(.EXP_W(11), .MAN_W(52)) dut   (.a_i(a),  .b_i(b),  .c_i(c),  .res_o(r));
  fp_fma #(.EXP_W(8),  .MAN_W(23)) dut_s (.a_i(sa), .b_i(sb), .c_i(sc), .res_o(sr));

  function automatic logic [63:0] rnd_dp(int sig_bits, int emin, int emax);
    logic [63:0] m;
    int e;
    m = {$urandom, $urandom};
    m[51:0] = m[51:0] & ~((52'd1 << (53 - sig_bits)) - 52'd1);
    e = emin + int'($urandom % 32'(emax - emin + 1));
    return {m[63], 11'(1023 + e), m[51:0]};
  endfunction

  // binary64 -> binary32 when exact, else 0 and ok = 0
  function automatic logic [31:0] dp2sp(logic [63:0] d, output logic ok);
    int e;
    e = int'(d[62:52]) - 1023;
    ok = (d[28:0] == '0) && (e > -126) && (e < 127);
    if (d[62:0] == '0) begin ok = 1; return {d[63], 31'd0}; end
    return {d[63], 8'(e + 127), d[51:29]};
  endfunction

  task automatic check_dp(logic [63:0] exp_bits, string what);
    #1;
    checks++;
    if (r !== exp_bits) begin
      failures++;
      $display("FAIL dp %s: a=%h b=%h c=%h got %h exp %h", what, a, b, c, r, exp_bits);
    end
  endtask

  initial begin
    logic [63:0] ref_bits;
    logic ok;
    // random exact-product cases, various exponent gaps
    for (int i = 0; i < 3000; i++) begin
      a = rnd_dp(26, -20, 20);
      b = rnd_dp(26, -20, 20);
      case (i % 4)
        0: c = rnd_dp(53, -40, 40);
        1: c = rnd_dp(53, -120, 120);
        2: c = $realtobits(-($bitstoreal(a) * $bitstoreal(b)) * 1.0000001);  // near cancellation
        default: c = rnd_dp(20, -2, 2);
      endcase
      ref_bits = $realtobits($bitstoreal(a) * $bitstoreal(b) + $bitstoreal(c));
      check_dp(ref_bits, "random");
    end
    // exact cancellation -> +0
    a = 64'h4008_0000_0000_0000; b = 64'h4010_0000_0000_0000; c = 64'hC028_0000_0000_0000;
    check_dp(64'h0, "cancel");
    // zero product keeps c
    a = 64'h0; c = 64'h4000_0000_0000_0001; check_dp(64'h4000_0000_0000_0001, "zero product");
    // -0 * 1 + -0 = -0
    a = 64'h8000_0000_0000_0000; b = 64'h3FF0_0000_0000_0000; c = 64'h8000_0000_0000_0000;
    check_dp(64'h8000_0000_0000_0000, "neg zero");
    // inf * 0 = NaN
    a = 64'h7FF0_0000_0000_0000; b = 64'h0; c = 64'h0; check_dp(64'h7FF8_0000_0000_0000, "inf*0");
    // inf * 2 + 1 = inf
    b = 64'h4000_0000_0000_0000; c = 64'h3FF0_0000_0000_0000; check_dp(64'h7FF0_0000_0000_0000, "inf");
    // overflow to inf
    a = 64'h7FE0_0000_0000_0000; b = 64'h4000_0000_0000_0000; c = 64'h0; check_dp(64'h7FF0_0000_0000_0000, "overflow");
    // round to nearest even: 1 + 2^-53 -> 1 (tie to even), 1 + 3*2^-53 -> 1+2^-51
    a = 64'h3FF0_0000_0000_0000; b = 64'h3FF0_0000_0000_0000; c = 64'h3CA0_0000_0000_0000;
    check_dp(64'h3FF0_0000_0000_0000, "tie even");
    c = 64'h3CB8_0000_0000_0000; check_dp(64'h3FF0_0000_0000_0002, "round up");

    // binary32
    for (int i = 0; i < 2000; i++) begin
      logic [63:0] da, db, dc;
      logic oka, okb, okc, okr;
      da = rnd_dp(10, -6, 6); db = rnd_dp(10, -6, 6); dc = rnd_dp(12, -6, 6);
      sa = dp2sp(da, oka); sb = dp2sp(db, okb); sc = dp2sp(dc, okc);
      ref_bits = $realtobits($bitstoreal(da) * $bitstoreal(db) + $bitstoreal(dc));
      #1;
      if (dp2sp(ref_bits, okr) != 32'h0 || ref_bits[62:0] == '0) begin
        if (okr) begin
          checks++;
          if (sr !== dp2sp(ref_bits, okr)) begin
            failures++;
            $display("FAIL sp: %h %h %h got %h exp %h", sa, sb, sc, sr, dp2sp(ref_bits, okr));
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
