// tb_ssr_streamer: configures random loop nests on both streams, serves their
// TCDM ports from a memory model with random grant stalls, and checks that
// read streams deliver mem[base + sum(idx_d*stride_d)] in loop order and that
// write streams store the pushed values at those addresses. A final run with
// no stalls checks that a read stream sustains one element per cycle.
module tb_ssr_streamer;
  import manticore_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_valid, cfg_we, ssr_en;
  logic [11:0] cfg_addr;
  logic [31:0] cfg_wdata, cfg_rdata;
  logic [1:0] tv, gnt, rv, rvalid, pop, push, wready;
  tcdm_req_t [1:0] treq;
  logic [1:0][63:0] trd, rdata, wdata;
  int checks = 0, failures = 0, cyc = 0, stall = 1;
  logic [63:0] mem [logic [31:0]];

  ssr_streamer dut (.clk_i(clk), .rst_ni(rst_n), .cfg_valid_i(cfg_valid), .cfg_we_i(cfg_we),
    .cfg_addr_i(cfg_addr), .cfg_wdata_i(cfg_wdata), .cfg_rdata_o(cfg_rdata), .ssr_en_o(ssr_en),
    .tcdm_valid_o(tv), .tcdm_req_o(treq), .tcdm_gnt_i(gnt), .tcdm_rvalid_i(rv), .tcdm_rdata_i(trd),
    .rdata_o(rdata), .rvalid_o(rvalid), .pop_i(pop), .wdata_i(wdata), .push_i(push), .wready_o(wready));

  always @(posedge clk) cyc <= cyc + 1;

  // memory model: grant with random stalls, data one cycle later
  always @(negedge clk) for (int s = 0; s < 2; s++) gnt[s] <= stall ? ($urandom % 3 != 0) : 1'b1;
  always @(posedge clk) begin
    for (int s = 0; s < 2; s++) begin
      rv[s] <= tv[s] && gnt[s] && !treq[s].we;
      if (tv[s] && gnt[s]) begin
        if (treq[s].we) mem[treq[s].addr] = treq[s].wdata;
        else trd[s] <= {treq[s].addr, ~treq[s].addr};
      end
    end
  end

  task automatic cfg_write(logic [11:0] a, logic [31:0] d);
    @(negedge clk); cfg_valid = 1; cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_valid = 0; cfg_we = 0;
  endtask

  // expected address list of a loop nest
  task automatic nest(int dims, int b[4], int st[4], int base, ref logic [31:0] q[$]);
    for (int i3 = 0; i3 <= (dims >= 3 ? b[3] : 0); i3++)
      for (int i2 = 0; i2 <= (dims >= 2 ? b[2] : 0); i2++)
        for (int i1 = 0; i1 <= (dims >= 1 ? b[1] : 0); i1++)
          for (int i0 = 0; i0 <= b[0]; i0++)
            q.push_back(32'(base + i0*st[0] + i1*st[1] + i2*st[2] + i3*st[3]));
  endtask

  logic [31:0] expa [2][$];
  logic [63:0] wvals [$];
  int wr_mode [2];

  // consumers / producers on the register side
  always @(negedge clk) begin
    for (int s = 0; s < 2; s++) begin
      pop[s]  <= 1'b0;
      push[s] <= 1'b0;
    end
  end
  always @(posedge clk) begin
    for (int s = 0; s < 2; s++) begin
      if (pop[s] && rvalid[s]) begin
        logic [31:0] a;
        a = expa[s].pop_front();
        checks++;
        if (rdata[s] !== {a, ~a}) begin failures++; $display("FAIL ssr%0d read %h exp addr %h", s, rdata[s], a); end
      end
    end
  end
  always @(negedge clk) begin
    #1;
    for (int s = 0; s < 2; s++) begin
      if (!wr_mode[s]) pop[s] = rvalid[s] && expa[s].size() > 0 && (!stall || $urandom % 2 == 0);
      else if (wready[s] && wvals.size() > 0 && $urandom % 2 == 0 && s == 1) begin
        push[s] = 1; wdata[s] = wvals.pop_front();
      end
    end
  end

  initial begin
    int b[4], st[4], dims, base, t0, n;
    logic [31:0] wa [$];
    logic [63:0] wv [$];
    cfg_valid = 0; cfg_we = 0; cfg_addr = 0; cfg_wdata = 0; pop = 0; push = 0; wdata = 0;
    wr_mode[0] = 0; wr_mode[1] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    cfg_write(12'h7C0, 1);
    checks++; if (!ssr_en) begin failures++; $display("FAIL enable"); end
    for (int k = 0; k < 12; k++) begin
      // stream 0: random read nest; stream 1: random write nest on odd runs
      for (int s = 0; s < 2; s++) begin
        dims = int'($urandom % 4);
        for (int d = 0; d < 4; d++) begin b[d] = int'($urandom % 4); st[d] = 8 * (int'($urandom % 9) - 2); end
        base = 32'h1000_0000 + 8 * int'($urandom % 1024);
        for (int d = 0; d < 4; d++) begin
          cfg_write(12'(s * 256 + 4 * d), 32'(b[d]));
          cfg_write(12'(s * 256 + 32 + 4 * d), 32'(st[d]));
        end
        cfg_write(12'(s * 256 + 64), 32'(dims));
        wr_mode[s] = (s == 1) && k[0];
        if (wr_mode[s]) begin
          wa.delete(); wv.delete();
          nest(dims, b, st, base, wa);
          foreach (wa[i]) begin wv.push_back({$urandom, $urandom}); wvals.push_back(wv[i]); end
          cfg_write(12'(s * 256 + 8'h64), 32'(base));
        end else begin
          nest(dims, b, st, base, expa[s]);
          cfg_write(12'(s * 256 + 8'h60), 32'(base));
        end
      end
      wait (expa[0].size() == 0 && expa[1].size() == 0 && wvals.size() == 0);
      repeat (30) @(posedge clk);
      // stream status reads done
      for (int s = 0; s < 2; s++) begin
        @(negedge clk); cfg_addr = 12'(s * 256 + 8'h70); #1;
        checks++; if (cfg_rdata[0] !== 1'b1) begin failures++; $display("FAIL ssr%0d not done", s); end
      end
      if (wr_mode[1]) begin
        // later writes to the same address win, as in the stream order
        logic [63:0] last_val [logic [31:0]];
        foreach (wa[i]) last_val[wa[i]] = wv[i];
        foreach (last_val[a]) begin
          checks++;
          if (!mem.exists(a) || mem[a] !== last_val[a]) begin failures++; $display("FAIL write at %h", a); end
        end
      end
    end
    // throughput: 64 elements, no stalls, consumer always ready
    stall = 0;
    cfg_write(12'h000, 63); cfg_write(12'h020, 8); cfg_write(12'h040, 0);
    nest(0, '{63, 0, 0, 0}, '{8, 0, 0, 0}, 32'h1000_0000, expa[0]);
    cfg_write(12'h060, 32'h1000_0000);
    t0 = cyc;
    wait (expa[0].size() == 0);
    n = cyc - t0;
    checks++;
    if (n > 64 + 4) begin failures++; $display("FAIL 64 elements took %0d cycles", n); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
