// wide_mem_model: behavioural memory slave of the wide bus for testbenches.
// Accepts requests with random back-pressure (STALL=1) and answers each one,
// in order, after a random latency. Contents live in an associative array of
// 512-bit lines; unwritten lines read as zero. write_line/read_line give the
// testbench direct access.
module wide_mem_model
  import manticore_pkg::*;
#(
  parameter bit STALL = 1
) (
  input  logic      clk_i,
  input  logic      valid_i,
  input  wide_req_t req_i,
  output logic      ready_o,
  output logic      rsp_valid_o,
  output wide_rsp_t rsp_o
);
  logic [WIDE_DW-1:0] mem [logic [WIDE_AW-1:0]];
  typedef struct { wide_rsp_t rsp; int due; } pend_t;
  pend_t q [$];
  int cyc = 0;
  int n_req = 0;

  function automatic void write_line(logic [WIDE_AW-1:0] a, logic [WIDE_DW-1:0] d);
    mem[{a[WIDE_AW-1:6], 6'd0}] = d;
  endfunction
  function automatic logic [WIDE_DW-1:0] read_line(logic [WIDE_AW-1:0] a);
    logic [WIDE_AW-1:0] k;
    k = {a[WIDE_AW-1:6], 6'd0};
    return mem.exists(k) ? mem[k] : '0;
  endfunction

  initial begin ready_o = 0; rsp_valid_o = 0; rsp_o = '0; end
  always @(negedge clk_i) ready_o <= STALL ? ($urandom % 3 != 0) : 1'b1;
  always @(posedge clk_i) begin
    int last_due;
    cyc <= cyc + 1;
    rsp_valid_o <= 1'b0;
    if (q.size() > 0 && q[0].due <= cyc) begin
      rsp_valid_o <= 1'b1;
      rsp_o <= q[0].rsp;
      void'(q.pop_front());
    end
    if (valid_i && ready_o) begin
      pend_t p;
      logic [WIDE_DW-1:0] l;
      n_req++;
      l = read_line(req_i.addr);
      if (req_i.we) begin
        for (int i = 0; i < WIDE_SW; i++) if (req_i.strb[i]) l[8*i +: 8] = req_i.wdata[8*i +: 8];
        write_line(req_i.addr, l);
      end
      p.rsp.rdata = l;
      last_due = (q.size() > 0) ? q[$].due : 0;
      p.due = cyc + 1 + (STALL ? int'($urandom % 4) : 0);
      if (p.due < last_due) p.due = last_due;
      q.push_back(p);
    end
  end
endmodule
