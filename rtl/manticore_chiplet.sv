// manticore_chiplet: one Manticore chiplet: 4 S3 quadrants x 2 S2 x 4 S1 x
// 4 clusters = 128 Snitch clusters of 8 cores (1024 cores), the L2 memory
// and the chiplet crossbar.
//
// Each cluster has an instruction refill uplink and a DMA data uplink. In an
// S1 quadrant the four clusters' refills share an instruction cache and
// their data uplinks share one uplink; an S2 quadrant does the same for four
// S1 quadrants; an S3 quadrant multiplexes the instruction and data uplinks
// of its two S2 quadrants onto one uplink. The four S3 uplinks meet in the
// chiplet crossbar, which sends L2 addresses (L2_BASE upwards) to the L2 and
// everything else to the external port.
// All cores start fetching at BOOT_ADDR (the start of the L2) when
// fetch_en_i is high; the program and its data are placed in the L2 through
// the host port beforehand. Hart IDs are (chiplet_id_i * 128 + cluster) * 8
// + core.
//
// Blocks of the chiplet that are not built appear as ports:
//  - host_*: line access to the L2, standing in for the PCIe endpoint and
//    the Ariane management cores that load programs and data;
//  - ext_*: the wide bus towards the HBM controller and, through the
//    Stage-4 crossbar, the other chiplets of the package.
// Status: per-cluster halted (all cores halted), bank-conflict, instruction
// cache miss, FPU issue, FREP and DMA activity flags.
// Follows the paper: the stage counts (4/4/2/4), 8 cores per cluster, 27 MB
// L2, shared instruction caches at S1 and S2, bandwidth sharing by uplinks.
// This design's choices: the address map, one crossbar for L2 and external
// traffic, the host port.
module manticore_chiplet
  import manticore_pkg::*;
#(
  parameter int unsigned NUM_S3       = 4,
  parameter int unsigned S2_PER_S3    = 2,
  parameter int unsigned S1_PER_S2    = 4,
  parameter int unsigned CL_PER_S1    = 4,
  parameter int unsigned CORES        = 8,
  parameter int unsigned TCDM_BYTES   = 131072,
  parameter int unsigned L2_BYTES     = 27 * 1024 * 1024,
  parameter int unsigned NUM_CL       = NUM_S3 * S2_PER_S3 * S1_PER_S2 * CL_PER_S1
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic [1:0]          chiplet_id_i,
  input  logic                fetch_en_i,
  // host access to the L2
  input  logic                host_valid_i,
  input  logic                host_we_i,
  input  logic [31:0]         host_addr_i,
  input  logic [WIDE_DW-1:0]  host_wdata_i,
  input  logic [WIDE_SW-1:0]  host_strb_i,
  output logic [WIDE_DW-1:0]  host_rdata_o,
  // external memory port
  output logic                ext_valid_o,
  output wide_req_t           ext_req_o,
  input  logic                ext_ready_i,
  input  logic                ext_rsp_valid_i,
  input  wide_rsp_t           ext_rsp_i,
  // status
  output logic [NUM_CL-1:0]   halted_o,
  output logic [NUM_CL-1:0]   conflict_o,
  output logic [NUM_CL-1:0]   cl_ic_miss_o,
  output logic [NUM_CL-1:0]   fpu_issue_o,
  output logic [NUM_CL-1:0]   frep_o,
  output logic [NUM_CL-1:0]   dma_busy_o,
  output logic                q_ic_miss_o   // a miss in an S1 or S2 instruction cache
);
  localparam int unsigned NS2 = NUM_S3 * S2_PER_S3;
  localparam int unsigned NS1 = NS2 * S1_PER_S2;

  // cluster uplinks
  logic      [NUM_CL-1:0] ci_valid, ci_ready, ci_rsp_valid, cd_valid, cd_ready, cd_rsp_valid;
  wide_req_t [NUM_CL-1:0] ci_req, cd_req;
  wide_rsp_t [NUM_CL-1:0] ci_rsp, cd_rsp;
  // S1 uplinks
  logic      [NS1-1:0] s1i_valid, s1i_ready, s1i_rsp_valid, s1d_valid, s1d_ready, s1d_rsp_valid, s1_miss;
  wide_req_t [NS1-1:0] s1i_req, s1d_req;
  wide_rsp_t [NS1-1:0] s1i_rsp, s1d_rsp;
  // S2 uplinks
  logic      [NS2-1:0] s2i_valid, s2i_ready, s2i_rsp_valid, s2d_valid, s2d_ready, s2d_rsp_valid, s2_miss;
  wide_req_t [NS2-1:0] s2i_req, s2d_req;
  wide_rsp_t [NS2-1:0] s2i_rsp, s2d_rsp;
  // S3 uplinks
  logic      [NUM_S3-1:0] s3_valid, s3_ready, s3_rsp_valid;
  wide_req_t [NUM_S3-1:0] s3_req;
  wide_rsp_t              s3_rsp;

  for (genvar k = 0; k < NUM_CL; k++) begin : g_cl
    logic [CORES-1:0] halted, issue, frep;
    logic [$clog2(2*CORES+1)-1:0] conflicts;
    snitch_cluster #(.NUM_CORES(CORES), .TCDM_BYTES(TCDM_BYTES)) i_cluster (
      .clk_i, .rst_ni,
      .cluster_id_i (32'(chiplet_id_i) * NUM_CL + 32'(k)),
      .fetch_en_i,
      .ic_valid_o (ci_valid[k]), .ic_req_o (ci_req[k]), .ic_ready_i (ci_ready[k]),
      .ic_rsp_valid_i (ci_rsp_valid[k]), .ic_rsp_i (ci_rsp[k]),
      .dm_valid_o (cd_valid[k]), .dm_req_o (cd_req[k]), .dm_ready_i (cd_ready[k]),
      .dm_rsp_valid_i (cd_rsp_valid[k]), .dm_rsp_i (cd_rsp[k]),
      .halted_o (halted), .conflicts_o (conflicts), .ic_miss_o (cl_ic_miss_o[k]),
      .fpu_issue_o (issue), .frep_busy_o (frep), .dma_busy_o (dma_busy_o[k])
    );
    assign halted_o[k]    = &halted;
    assign conflict_o[k]  = conflicts != 0;
    assign fpu_issue_o[k] = |issue;
    assign frep_o[k]      = |frep;
  end

  for (genvar q = 0; q < NS1; q++) begin : g_s1
    quadrant #(.NUM_MEMBERS(CL_PER_S1), .HAS_ICACHE(1'b1)) i_s1 (
      .clk_i, .rst_ni,
      .mi_valid_i (ci_valid[q*CL_PER_S1 +: CL_PER_S1]), .mi_req_i (ci_req[q*CL_PER_S1 +: CL_PER_S1]),
      .mi_ready_o (ci_ready[q*CL_PER_S1 +: CL_PER_S1]), .mi_rsp_valid_o (ci_rsp_valid[q*CL_PER_S1 +: CL_PER_S1]),
      .mi_rsp_o (ci_rsp[q*CL_PER_S1 +: CL_PER_S1]),
      .md_valid_i (cd_valid[q*CL_PER_S1 +: CL_PER_S1]), .md_req_i (cd_req[q*CL_PER_S1 +: CL_PER_S1]),
      .md_ready_o (cd_ready[q*CL_PER_S1 +: CL_PER_S1]), .md_rsp_valid_o (cd_rsp_valid[q*CL_PER_S1 +: CL_PER_S1]),
      .md_rsp_o (cd_rsp[q*CL_PER_S1 +: CL_PER_S1]),
      .ui_valid_o (s1i_valid[q]), .ui_req_o (s1i_req[q]), .ui_ready_i (s1i_ready[q]),
      .ui_rsp_valid_i (s1i_rsp_valid[q]), .ui_rsp_i (s1i_rsp[q]),
      .ud_valid_o (s1d_valid[q]), .ud_req_o (s1d_req[q]), .ud_ready_i (s1d_ready[q]),
      .ud_rsp_valid_i (s1d_rsp_valid[q]), .ud_rsp_i (s1d_rsp[q]),
      .ic_miss_o (s1_miss[q])
    );
  end

  for (genvar q = 0; q < NS2; q++) begin : g_s2
    quadrant #(.NUM_MEMBERS(S1_PER_S2), .HAS_ICACHE(1'b1)) i_s2 (
      .clk_i, .rst_ni,
      .mi_valid_i (s1i_valid[q*S1_PER_S2 +: S1_PER_S2]), .mi_req_i (s1i_req[q*S1_PER_S2 +: S1_PER_S2]),
      .mi_ready_o (s1i_ready[q*S1_PER_S2 +: S1_PER_S2]), .mi_rsp_valid_o (s1i_rsp_valid[q*S1_PER_S2 +: S1_PER_S2]),
      .mi_rsp_o (s1i_rsp[q*S1_PER_S2 +: S1_PER_S2]),
      .md_valid_i (s1d_valid[q*S1_PER_S2 +: S1_PER_S2]), .md_req_i (s1d_req[q*S1_PER_S2 +: S1_PER_S2]),
      .md_ready_o (s1d_ready[q*S1_PER_S2 +: S1_PER_S2]), .md_rsp_valid_o (s1d_rsp_valid[q*S1_PER_S2 +: S1_PER_S2]),
      .md_rsp_o (s1d_rsp[q*S1_PER_S2 +: S1_PER_S2]),
      .ui_valid_o (s2i_valid[q]), .ui_req_o (s2i_req[q]), .ui_ready_i (s2i_ready[q]),
      .ui_rsp_valid_i (s2i_rsp_valid[q]), .ui_rsp_i (s2i_rsp[q]),
      .ud_valid_o (s2d_valid[q]), .ud_req_o (s2d_req[q]), .ud_ready_i (s2d_ready[q]),
      .ud_rsp_valid_i (s2d_rsp_valid[q]), .ud_rsp_i (s2d_rsp[q]),
      .ic_miss_o (s2_miss[q])
    );
  end

  for (genvar q = 0; q < NUM_S3; q++) begin : g_s3
    logic      unused_valid, unused_miss;
    wide_req_t unused_req;
    quadrant #(.NUM_MEMBERS(S2_PER_S3), .HAS_ICACHE(1'b0)) i_s3 (
      .clk_i, .rst_ni,
      .mi_valid_i (s2i_valid[q*S2_PER_S3 +: S2_PER_S3]), .mi_req_i (s2i_req[q*S2_PER_S3 +: S2_PER_S3]),
      .mi_ready_o (s2i_ready[q*S2_PER_S3 +: S2_PER_S3]), .mi_rsp_valid_o (s2i_rsp_valid[q*S2_PER_S3 +: S2_PER_S3]),
      .mi_rsp_o (s2i_rsp[q*S2_PER_S3 +: S2_PER_S3]),
      .md_valid_i (s2d_valid[q*S2_PER_S3 +: S2_PER_S3]), .md_req_i (s2d_req[q*S2_PER_S3 +: S2_PER_S3]),
      .md_ready_o (s2d_ready[q*S2_PER_S3 +: S2_PER_S3]), .md_rsp_valid_o (s2d_rsp_valid[q*S2_PER_S3 +: S2_PER_S3]),
      .md_rsp_o (s2d_rsp[q*S2_PER_S3 +: S2_PER_S3]),
      .ui_valid_o (unused_valid), .ui_req_o (unused_req), .ui_ready_i (1'b0),
      .ui_rsp_valid_i (1'b0), .ui_rsp_i ('0),
      .ud_valid_o (s3_valid[q]), .ud_req_o (s3_req[q]), .ud_ready_i (s3_ready[q]),
      .ud_rsp_valid_i (s3_rsp_valid[q]), .ud_rsp_i (s3_rsp),
      .ic_miss_o (unused_miss)
    );
  end

  assign q_ic_miss_o = |s1_miss || |s2_miss;

  logic      l2_valid, l2_ready, l2_rsp_valid;
  wide_req_t l2_req;
  wide_rsp_t l2_rsp;

  chiplet_xbar #(.NUM_PORTS(NUM_S3)) i_xbar (
    .clk_i, .rst_ni,
    .s_valid_i (s3_valid), .s_req_i (s3_req), .s_ready_o (s3_ready),
    .s_rsp_valid_o (s3_rsp_valid), .s_rsp_o (s3_rsp),
    .l2_valid_o (l2_valid), .l2_req_o (l2_req), .l2_ready_i (l2_ready),
    .l2_rsp_valid_i (l2_rsp_valid), .l2_rsp_i (l2_rsp),
    .ext_valid_o, .ext_req_o, .ext_ready_i, .ext_rsp_valid_i, .ext_rsp_i
  );

  l2_memory #(.SIZE_BYTES(L2_BYTES)) i_l2 (
    .clk_i, .rst_ni,
    .valid_i (l2_valid), .req_i (l2_req), .ready_o (l2_ready),
    .rsp_valid_o (l2_rsp_valid), .rsp_o (l2_rsp),
    .host_valid_i, .host_we_i, .host_addr_i, .host_wdata_i, .host_strb_i, .host_rdata_o
  );
endmodule
