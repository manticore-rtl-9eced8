// tb_fpu: issues a back-to-back stream of DP and packed-SP operations and
// checks each result, its destination tag and that it appears exactly
// LATENCY (3) cycles after issue. References are computed with the
// simulator's double arithmetic on values whose results are exact.
module tb_fpu;
  import manticore_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, simd, out_valid;
  fpu_op_e op;
  logic [63:0] a, b, c, res;
  logic [4:0] rd, rd_o;
  int checks = 0, failures = 0;

  fpu dut (.clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .op_i(op), .simd_i(simd),
           .a_i(a), .b_i(b), .c_i(c), .rd_i(rd), .out_valid_o(out_valid), .res_o(res), .rd_o(rd_o));

  typedef struct { logic [63:0] res; logic [4:0] rd; int t; } exp_t;
  exp_t q[$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic logic [31:0] sp(real r);  // exact small values only
    logic [63:0] d;
    d = $realtobits(r);
    if (d[62:0] == '0) return {d[63], 31'd0};
    return {d[63], 8'(int'(d[62:52]) - 1023 + 127), d[51:29]};
  endfunction

  always @(posedge clk) begin
    if (out_valid) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin failures++; $display("FAIL unexpected output"); end
      else begin
        e = q.pop_front();
        if (res !== e.res || rd_o !== e.rd || cyc - e.t != 3) begin
          failures++;
          $display("FAIL res %h exp %h rd %0d exp %0d lat %0d", res, e.res, rd_o, e.rd, cyc - e.t);
        end
      end
    end
  end

  initial begin
    in_valid = 0; op = FOP_FMADD; simd = 0; a = 0; b = 0; c = 0; rd = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      real ra, rb, rc, r2a, r2b, r2c;
      exp_t e;
      ra = real'($urandom % 200) - 100.0; rb = real'($urandom % 64) / 8.0; rc = real'($urandom % 1000) - 500.0;
      r2a = real'($urandom % 100) / 4.0; r2b = real'($urandom % 50) - 25.0; r2c = real'($urandom % 300);
      @(negedge clk);
      in_valid = 1; rd = 5'(i); simd = i[0];
      op = fpu_op_e'(i % 6);
      if (!simd) begin
        a = $realtobits(ra); b = $realtobits(rb); c = $realtobits(rc);
      end else begin
        a = {sp(r2a), sp(ra)}; b = {sp(r2b), sp(rb)}; c = {sp(r2c), sp(rc)};
      end
      case (op)
        FOP_FMADD: e.res = simd ? {sp(r2a*r2b+r2c), sp(ra*rb+rc)} : $realtobits(ra*rb+rc);
        FOP_ADD:   e.res = simd ? {sp(r2a+r2c), sp(ra+rc)}       : $realtobits(ra+rc);
        FOP_MUL:   e.res = simd ? {sp(r2a*r2b), sp(ra*rb)}       : $realtobits(ra*rb);
        FOP_SGNJ:  e.res = simd ? {b[63], a[62:32], b[31], a[30:0]} : {b[63], a[62:0]};
        FOP_SGNJN: e.res = simd ? {~b[63], a[62:32], ~b[31], a[30:0]} : {~b[63], a[62:0]};
        default:   e.res = simd ? {a[63]^b[63], a[62:32], a[31]^b[31], a[30:0]} : {a[63]^b[63], a[62:0]};
      endcase
      // multiplying by zero gives +0 or -0; the reference real keeps the sign
      e.rd = rd; e.t = cyc;
      q.push_back(e);
    end
    @(negedge clk); in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d results missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
