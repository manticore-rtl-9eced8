// chiplet_xbar: the top stage of the chiplet's interconnect. It joins the
// NUM_PORTS S3 quadrant uplinks and routes each request by address: the
// L2 window (L2_BASE, L2_WINDOW bytes) to the L2 memory, every other
// address to the external port, which leads to the HBM controller and the
// other chiplets (neither is built here).
//
// The uplinks are first multiplexed round-robin (wide_mux), so requests
// leave in one order and responses must come back in that order. The
// router counts the requests outstanding at the current target; a request
// for the other target waits until that count is zero, so responses from
// the two targets can never overtake each other.
// Follows the paper: "Four S3 quadrants per chiplet share access to the HBM
// memory"; the L2 sits beside them on the chiplet. The single shared
// router and the address map are this design's choices.
module chiplet_xbar
  import manticore_pkg::*;
#(
  parameter int unsigned NUM_PORTS = 4,
  parameter logic [WIDE_AW-1:0] L2_WINDOW = 48'h0000_0200_0000
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  input  logic      [NUM_PORTS-1:0]   s_valid_i,
  input  wide_req_t [NUM_PORTS-1:0]   s_req_i,
  output logic      [NUM_PORTS-1:0]   s_ready_o,
  output logic      [NUM_PORTS-1:0]   s_rsp_valid_o,
  output wide_rsp_t                   s_rsp_o,
  // L2 memory
  output logic                        l2_valid_o,
  output wide_req_t                   l2_req_o,
  input  logic                        l2_ready_i,
  input  logic                        l2_rsp_valid_i,
  input  wide_rsp_t                   l2_rsp_i,
  // external (HBM, other chiplets)
  output logic                        ext_valid_o,
  output wide_req_t                   ext_req_o,
  input  logic                        ext_ready_i,
  input  logic                        ext_rsp_valid_i,
  input  wide_rsp_t                   ext_rsp_i
);
  logic      m_valid, m_ready, m_rsp_valid;
  wide_req_t m_req;
  wide_rsp_t m_rsp;

  wide_mux #(.N(NUM_PORTS)) i_mux (
    .clk_i, .rst_ni,
    .s_valid_i, .s_req_i, .s_ready_o, .s_rsp_valid_o, .s_rsp_o,
    .m_valid_o (m_valid), .m_req_o (m_req), .m_ready_i (m_ready),
    .m_rsp_valid_i (m_rsp_valid), .m_rsp_i (m_rsp)
  );

  logic       to_l2, cur_l2_q, blocked;
  logic [7:0] outst_q;
  assign to_l2   = m_req.addr >= WIDE_AW'(L2_BASE) && m_req.addr < WIDE_AW'(L2_BASE) + L2_WINDOW;
  assign blocked = (outst_q != 0) && (to_l2 != cur_l2_q) || (outst_q == 8'hFF);

  assign l2_valid_o  = m_valid && !blocked && to_l2;
  assign ext_valid_o = m_valid && !blocked && !to_l2;
  assign l2_req_o    = m_req;
  assign ext_req_o   = m_req;
  assign m_ready     = !blocked && (to_l2 ? l2_ready_i : ext_ready_i);

  assign m_rsp_valid = cur_l2_q ? l2_rsp_valid_i : ext_rsp_valid_i;
  assign m_rsp       = cur_l2_q ? l2_rsp_i : ext_rsp_i;

  logic fire;
  assign fire = m_valid && m_ready;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      outst_q  <= '0;
      cur_l2_q <= 1'b1;
    end else begin
      if (fire) cur_l2_q <= to_l2;
      outst_q <= outst_q + 8'(fire) - 8'(m_rsp_valid);
    end
  end

  // a response only comes from the target with outstanding requests
  assert property (@(posedge clk_i) disable iff (!rst_ni)
    (cur_l2_q ? ext_rsp_valid_i : l2_rsp_valid_i) == 1'b0);
endmodule
