// quadrant: one stage of the chiplet's tree interconnect (S1, S2 or S3).
//
// NUM_MEMBERS members (clusters or lower-stage quadrants) each bring two
// wide uplinks: instruction refills and data. With HAS_ICACHE set, the
// members' instruction refills go through a shared instruction cache of
// ICACHE_BYTES, whose misses leave on the quadrant's instruction uplink,
// and the members' data uplinks are multiplexed round-robin onto the
// quadrant's data uplink. Without it, both kinds of member traffic share
// the single data uplink (2*NUM_MEMBERS inputs) and the instruction uplink
// is idle.
// All links are the 512-bit wide bus: valid/ready requests, responses in
// request order, one cycle or more later.
// Follows the paper: "Four clusters share an instruction cache and an
// uplink into the next stage", "four S1 quadrants share an instruction
// cache and an uplink into the S2 quadrant and two S2 quadrants share an
// uplink into the S3 quadrant". The cache size of the S1/S2 instruction
// caches is not mentioned; this design uses 8 KiB.
module quadrant
  import manticore_pkg::*;
#(
  parameter int unsigned NUM_MEMBERS  = 4,
  parameter bit          HAS_ICACHE   = 1'b1,
  parameter int unsigned ICACHE_BYTES = 8192
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  // members
  input  logic      [NUM_MEMBERS-1:0]   mi_valid_i,
  input  wide_req_t [NUM_MEMBERS-1:0]   mi_req_i,
  output logic      [NUM_MEMBERS-1:0]   mi_ready_o,
  output logic      [NUM_MEMBERS-1:0]   mi_rsp_valid_o,
  output wide_rsp_t [NUM_MEMBERS-1:0]   mi_rsp_o,
  input  logic      [NUM_MEMBERS-1:0]   md_valid_i,
  input  wide_req_t [NUM_MEMBERS-1:0]   md_req_i,
  output logic      [NUM_MEMBERS-1:0]   md_ready_o,
  output logic      [NUM_MEMBERS-1:0]   md_rsp_valid_o,
  output wide_rsp_t [NUM_MEMBERS-1:0]   md_rsp_o,
  // uplinks
  output logic                          ui_valid_o,
  output wide_req_t                     ui_req_o,
  input  logic                          ui_ready_i,
  input  logic                          ui_rsp_valid_i,
  input  wide_rsp_t                     ui_rsp_i,
  output logic                          ud_valid_o,
  output wide_req_t                     ud_req_o,
  input  logic                          ud_ready_i,
  input  logic                          ud_rsp_valid_i,
  input  wide_rsp_t                     ud_rsp_i,
  output logic                          ic_miss_o
);
  if (HAS_ICACHE) begin : g_ic
    logic [NUM_MEMBERS-1:0][WIDE_AW-1:0] addr;
    wide_rsp_t rsp;
    for (genvar m = 0; m < NUM_MEMBERS; m++) begin : g_a
      assign addr[m]     = mi_req_i[m].addr;
      assign mi_rsp_o[m] = rsp;
    end
    icache #(.NUM_PORTS(NUM_MEMBERS), .SIZE_BYTES(ICACHE_BYTES)) i_icache (
      .clk_i, .rst_ni,
      .req_valid_i (mi_valid_i), .req_addr_i (addr), .req_ready_o (mi_ready_o),
      .rsp_valid_o (mi_rsp_valid_o), .rsp_data_o (rsp.rdata),
      .refill_valid_o (ui_valid_o), .refill_req_o (ui_req_o), .refill_ready_i (ui_ready_i),
      .refill_rsp_valid_i (ui_rsp_valid_i), .refill_rsp_i (ui_rsp_i),
      .miss_o (ic_miss_o)
    );
    wide_rsp_t drsp;
    wide_mux #(.N(NUM_MEMBERS)) i_mux (
      .clk_i, .rst_ni,
      .s_valid_i (md_valid_i), .s_req_i (md_req_i), .s_ready_o (md_ready_o),
      .s_rsp_valid_o (md_rsp_valid_o), .s_rsp_o (drsp),
      .m_valid_o (ud_valid_o), .m_req_o (ud_req_o), .m_ready_i (ud_ready_i),
      .m_rsp_valid_i (ud_rsp_valid_i), .m_rsp_i (ud_rsp_i)
    );
    for (genvar m = 0; m < NUM_MEMBERS; m++) begin : g_d
      assign md_rsp_o[m] = drsp;
    end
  end else begin : g_noic
    wide_rsp_t rsp;
    wide_mux #(.N(2 * NUM_MEMBERS)) i_mux (
      .clk_i, .rst_ni,
      .s_valid_i ({mi_valid_i, md_valid_i}), .s_req_i ({mi_req_i, md_req_i}),
      .s_ready_o ({mi_ready_o, md_ready_o}),
      .s_rsp_valid_o ({mi_rsp_valid_o, md_rsp_valid_o}), .s_rsp_o (rsp),
      .m_valid_o (ud_valid_o), .m_req_o (ud_req_o), .m_ready_i (ud_ready_i),
      .m_rsp_valid_i (ud_rsp_valid_i), .m_rsp_i (ud_rsp_i)
    );
    for (genvar m = 0; m < NUM_MEMBERS; m++) begin : g_r
      assign mi_rsp_o[m] = rsp;
      assign md_rsp_o[m] = rsp;
    end
    assign ui_valid_o = 1'b0;
    assign ui_req_o   = '0;
    assign ic_miss_o  = 1'b0;
  end
endmodule
