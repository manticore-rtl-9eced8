// snitch_cluster: one Snitch compute cluster: eight core complexes, the
// 128 KiB 32-bank TCDM they share, the shared 8 KiB instruction cache and
// the DMA engine.
//
// Each core complex has two narrow TCDM ports (ports 2c and 2c+1 of the
// TCDM) and one instruction refill port into the shared instruction cache.
// The cluster peripheral space (PERIPH_BASE) holds the DMA registers; in a
// cycle where several cores access it, the lowest-numbered core is served
// and the others' accesses are dropped, so software lets one core (core 0
// by convention) program the DMA. Hart IDs are cluster_id_i * 8 + core.
//
// The cluster has two wide (512-bit) uplinks into its S1 quadrant: the
// instruction cache's refills and the DMA's data transfers. The cores have
// no direct path to global memory; all global data moves through the DMA,
// as in the paper's "DMA engines is used for efficient, bulk,
// data-movement".
// Status outputs: halted_o has one bit per core; conflicts_o, ic_miss_o,
// fpu_issue_o, frep_busy_o and dma_busy_o are event signals that
// testbenches count.
// Follows the paper: 8 cores, 128 KiB TCDM in 32 banks, 8 KiB shared
// instruction cache, DMA with a 512-bit port. This design's choices: the
// peripheral arbitration, the separate instruction and data uplinks.
module snitch_cluster
  import manticore_pkg::*;
#(
  parameter int unsigned NUM_CORES   = 8,
  parameter int unsigned TCDM_BYTES  = 131072,
  parameter int unsigned TCDM_BANKS  = 32,
  parameter int unsigned ICACHE_BYTES = 8192
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic [31:0]           cluster_id_i,
  input  logic                  fetch_en_i,
  // instruction refill uplink
  output logic                  ic_valid_o,
  output wide_req_t             ic_req_o,
  input  logic                  ic_ready_i,
  input  logic                  ic_rsp_valid_i,
  input  wide_rsp_t             ic_rsp_i,
  // DMA data uplink
  output logic                  dm_valid_o,
  output wide_req_t             dm_req_o,
  input  logic                  dm_ready_i,
  input  logic                  dm_rsp_valid_i,
  input  wide_rsp_t             dm_rsp_i,
  // status
  output logic [NUM_CORES-1:0]  halted_o,
  output logic [$clog2(2*NUM_CORES+1)-1:0] conflicts_o,
  output logic                  ic_miss_o,
  output logic [NUM_CORES-1:0]  fpu_issue_o,
  output logic [NUM_CORES-1:0]  frep_busy_o,
  output logic                  dma_busy_o
);
  localparam int unsigned NP = 2 * NUM_CORES;

  logic [NUM_CORES-1:0]              icq_valid, icq_ready, icq_rsp_valid;
  logic [NUM_CORES-1:0][WIDE_AW-1:0] icq_addr;
  logic [WIDE_DW-1:0]                icq_data;

  logic      [NP-1:0]       t_valid, t_gnt, t_rvalid;
  tcdm_req_t [NP-1:0]       t_req;
  logic      [NP-1:0][63:0] t_rdata;

  logic [NUM_CORES-1:0]            p_valid, p_we;
  logic [NUM_CORES-1:0][7:0]       p_addr;
  logic [NUM_CORES-1:0][31:0]      p_wdata;
  logic [31:0]                     p_rdata;

  for (genvar c = 0; c < NUM_CORES; c++) begin : g_cc
    core_complex i_cc (
      .clk_i, .rst_ni,
      .hart_id_i      (cluster_id_i * NUM_CORES + 32'(c)),
      .fetch_en_i,
      .ic_req_valid_o (icq_valid[c]),
      .ic_req_addr_o  (icq_addr[c]),
      .ic_req_ready_i (icq_ready[c]),
      .ic_rsp_valid_i (icq_rsp_valid[c]),
      .ic_rsp_data_i  (icq_data),
      .tcdm_valid_o   (t_valid[2*c +: 2]),
      .tcdm_req_o     (t_req[2*c +: 2]),
      .tcdm_gnt_i     (t_gnt[2*c +: 2]),
      .tcdm_rvalid_i  (t_rvalid[2*c +: 2]),
      .tcdm_rdata_i   (t_rdata[2*c +: 2]),
      .periph_valid_o (p_valid[c]),
      .periph_we_o    (p_we[c]),
      .periph_addr_o  (p_addr[c]),
      .periph_wdata_o (p_wdata[c]),
      .periph_rdata_i (p_rdata),
      .halted_o       (halted_o[c]),
      .fpu_issue_o    (fpu_issue_o[c]),
      .frep_busy_o    (frep_busy_o[c])
    );
  end

  icache #(.NUM_PORTS(NUM_CORES), .SIZE_BYTES(ICACHE_BYTES)) i_icache (
    .clk_i, .rst_ni,
    .req_valid_i (icq_valid), .req_addr_i (icq_addr), .req_ready_o (icq_ready),
    .rsp_valid_o (icq_rsp_valid), .rsp_data_o (icq_data),
    .refill_valid_o (ic_valid_o), .refill_req_o (ic_req_o), .refill_ready_i (ic_ready_i),
    .refill_rsp_valid_i (ic_rsp_valid_i), .refill_rsp_i (ic_rsp_i),
    .miss_o (ic_miss_o)
  );

  // peripheral access: lowest-numbered requesting core
  logic        r_valid, r_we;
  logic [7:0]  r_addr;
  logic [31:0] r_wdata;
  always_comb begin
    r_valid = 1'b0; r_we = 1'b0; r_addr = '0; r_wdata = '0;
    for (int c = NUM_CORES - 1; c >= 0; c--) begin
      if (p_valid[c]) begin
        r_valid = 1'b1; r_we = p_we[c]; r_addr = p_addr[c]; r_wdata = p_wdata[c];
      end
    end
  end

  logic                 d_valid, d_we, d_gnt, d_rvalid;
  logic [31:0]          d_addr;
  logic [WIDE_DW-1:0]   d_wdata, d_rdata;
  logic [WIDE_SW-1:0]   d_strb;

  dma_engine i_dma (
    .clk_i, .rst_ni,
    .reg_valid_i (r_valid), .reg_we_i (r_we), .reg_addr_i (r_addr),
    .reg_wdata_i (r_wdata), .reg_rdata_o (p_rdata),
    .m_valid_o (dm_valid_o), .m_req_o (dm_req_o), .m_ready_i (dm_ready_i),
    .m_rsp_valid_i (dm_rsp_valid_i), .m_rsp_i (dm_rsp_i),
    .t_valid_o (d_valid), .t_addr_o (d_addr), .t_we_o (d_we), .t_wdata_o (d_wdata),
    .t_strb_o (d_strb), .t_gnt_i (d_gnt), .t_rvalid_i (d_rvalid), .t_rdata_i (d_rdata),
    .busy_o (dma_busy_o)
  );

  tcdm #(.SIZE_BYTES(TCDM_BYTES), .NUM_BANKS(TCDM_BANKS), .NUM_PORTS(NP)) i_tcdm (
    .clk_i, .rst_ni,
    .req_valid_i (t_valid), .req_i (t_req), .gnt_o (t_gnt), .rvalid_o (t_rvalid), .rdata_o (t_rdata),
    .dma_valid_i (d_valid), .dma_addr_i (d_addr), .dma_we_i (d_we), .dma_wdata_i (d_wdata),
    .dma_strb_i (d_strb), .dma_gnt_o (d_gnt), .dma_rvalid_o (d_rvalid), .dma_rdata_o (d_rdata),
    .conflicts_o
  );
endmodule
