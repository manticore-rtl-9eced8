// wide_mux: N-to-1 multiplexer of the wide bus, the building block of the
// bandwidth-thinning tree: N members (clusters, or lower quadrants) share one
// uplink into the next stage.
//
// Requests are granted round-robin, one per cycle, and the index of the
// granted member is written into a FIFO of DEPTH entries. The upstream side
// answers every request (read or write) with one response, in order, so
// each response is returned to the member at the head of the FIFO. When the
// FIFO is full, no further request is granted. Responses are always accepted.
// The paper gives the tree (four clusters share an uplink, four S1 quadrants
// share an uplink, two S2 quadrants share an uplink); the arbitration,
// in-order responses and FIFO depth are this design's choices.
module wide_mux
  import manticore_pkg::*;
#(
  parameter int unsigned N     = 4,
  parameter int unsigned DEPTH = 4
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic      [N-1:0]    s_valid_i,
  input  wide_req_t [N-1:0]    s_req_i,
  output logic      [N-1:0]    s_ready_o,
  output logic      [N-1:0]    s_rsp_valid_o,
  output wide_rsp_t            s_rsp_o,
  output logic                 m_valid_o,
  output wide_req_t            m_req_o,
  input  logic                 m_ready_i,
  input  logic                 m_rsp_valid_i,
  input  wide_rsp_t            m_rsp_i
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned DW = $clog2(DEPTH);

  logic [IW-1:0] rr_q, sel;
  logic          any, full, push, pop;
  logic [DEPTH-1:0][IW-1:0] fifo_q;
  logic [DW-1:0] wp_q, rp_q;
  logic [DW:0]   cnt_q;

  always_comb begin
    sel = '0;
    any = 1'b0;
    for (int k = int'(N) - 1; k >= 0; k--) begin
      logic signed [31:0] p;
      p = (int'(rr_q) + k) % int'(N);
      if (s_valid_i[p]) begin sel = IW'(p); any = 1'b1; end
    end
  end

  assign full      = (32'(cnt_q) == DEPTH);
  assign m_valid_o = any && !full;
  assign m_req_o   = s_req_i[sel];
  assign push      = m_valid_o && m_ready_i;
  assign pop       = m_rsp_valid_i;

  always_comb begin
    s_ready_o = '0;
    if (!full) s_ready_o[sel] = any && m_ready_i;
    s_rsp_valid_o = '0;
    if (pop) s_rsp_valid_o[fifo_q[rp_q]] = 1'b1;
  end
  assign s_rsp_o = m_rsp_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rr_q <= '0; wp_q <= '0; rp_q <= '0; cnt_q <= '0; fifo_q <= '0;
    end else begin
      if (push) begin
        fifo_q[wp_q] <= sel;
        wp_q <= (32'(wp_q) == DEPTH - 1) ? '0 : wp_q + 1'b1;
        rr_q <= (32'(sel) == N - 1) ? '0 : sel + 1'b1;
      end
      if (pop) rp_q <= (32'(rp_q) == DEPTH - 1) ? '0 : rp_q + 1'b1;
      cnt_q <= cnt_q + (DW+1)'(push) - (DW+1)'(pop);
    end
  end

  // every response belongs to an outstanding request
  assert property (@(posedge clk_i) disable iff (!rst_ni) m_rsp_valid_i |-> cnt_q != 0);

endmodule
