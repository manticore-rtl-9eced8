// tb_frep_sequencer: feeds the sequencer with instruction streams containing
// frep loops, expands the same streams in a reference model, and compares the
// emitted instruction order. Phase 1 uses random back-pressure and random
// loop sizes; phase 2 replays the matrix-vector loop of the paper's example
// (4 fmv.d, frep of 4 fmadd.d over 48 iterations, 4 fsd) with the FPU always
// ready and checks that the 192 fmadd.d leave on 192 consecutive cycles and
// that the 13 offloaded instructions (4 fmv.d, frep, 4 fmadd.d, 4 fsd) turn
// into 200 FP instructions. Together with the frep and the three integer
// instructions of the loop this is the 16 -> 204 expansion of the example.
module tb_frep_sequencer;
  import manticore_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready, busy;
  offload_t in_d, out_d;
  int checks = 0, failures = 0;

  frep_sequencer dut (.clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_ready_o(in_ready),
    .in_i(in_d), .out_valid_o(out_valid), .out_ready_i(out_ready), .out_o(out_d), .busy_o(busy));

  offload_t stim[$], expq[$];
  int n_out = 0, first_fma = -1, last_fma = -1, cyc = 0, rand_ready = 1;

  function automatic offload_t fp_instr(int tag);
    offload_t o;
    o.instr = {7'(tag >> 5), 5'd0, 5'd0, 3'd0, 5'(tag), 7'b1010011};
    o.op = 32'(tag);
    return o;
  endfunction
  function automatic offload_t frep_instr(int n, int reps);
    offload_t o;
    o.instr = {12'(n), 5'd5, 3'd0, 5'd0, OPC_FREP};
    o.op = 32'(reps);
    return o;
  endfunction
  // build stimulus and reference expansion
  task automatic add_loop(int n, int reps, int base);
    offload_t body[$];
    stim.push_back(frep_instr(n, reps));
    for (int i = 0; i < n; i++) begin body.push_back(fp_instr(base + i)); stim.push_back(body[i]); end
    for (int r = 0; r < (reps == 0 ? 1 : reps); r++) foreach (body[i]) expq.push_back(body[i]);
  endtask
  task automatic add_plain(int tag);
    stim.push_back(fp_instr(tag)); expq.push_back(fp_instr(tag));
  endtask

  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) out_ready <= rand_ready ? ($urandom % 4 != 0) : 1'b1;

  // driver
  always @(posedge clk) begin
    if (rst_n && in_valid && in_ready) void'(stim.pop_front());
  end
  always @(negedge clk) begin
    in_valid <= rst_n && stim.size() > 0;
    if (stim.size() > 0) in_d <= stim[0];
  end
  // monitor
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      offload_t e;
      checks++;
      e = expq.pop_front();
      if (out_d !== e) begin failures++; $display("FAIL out %h exp %h", out_d, e); end
      if (out_d.op >= 1000 && out_d.op < 1004) begin
        if (first_fma < 0) first_fma = cyc;
        last_fma = cyc;
      end
      n_out++;
    end
  end

  initial begin
    in_valid = 0; in_d = '0; out_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // phase 1: random loops with back-pressure
    for (int k = 0; k < 40; k++) begin
      add_plain(k);
      add_loop(1 + int'($urandom % 16), int'($urandom % 6), 100 + 20 * k);
    end
    wait (expq.size() == 0);
    repeat (3) @(posedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL busy after loops"); end
    // phase 2: the paper's matrix-vector inner loop
    rand_ready = 0;
    n_out = 0;
    for (int i = 0; i < 4; i++) add_plain(2000 + i);   // fmv.d
    add_loop(4, 48, 1000);                            // frep t0, 4 ; 4 x fmadd.d
    for (int i = 0; i < 4; i++) add_plain(3000 + i);   // fsd
    wait (expq.size() == 0);
    repeat (2) @(posedge clk);
    checks++;
    if (n_out != 200) begin failures++; $display("FAIL %0d instructions executed, expected 200", n_out); end
    checks++;
    if (last_fma - first_fma + 1 != 192) begin
      failures++; $display("FAIL fmadd.d spread over %0d cycles, expected 192", last_fma - first_fma + 1);
    end
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
