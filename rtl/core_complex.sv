// core_complex: one Snitch core complex (CC): the integer core with its L0
// instruction cache, the FPU sequencer (FREP buffer), the FPU subsystem and
// the two SSR streams, with two narrow ports into the cluster's TCDM.
//
// Data flow: the core fetches through the L0 cache, whose misses go to the
// cluster's shared instruction cache. FP and frep instructions go from the
// core through the sequencer into the FPU subsystem. The core's own data
// accesses are decoded by address: the TCDM, the core-private SSR
// configuration registers (SSR_BASE), or the cluster peripherals
// (PERIPH_BASE, i.e. the DMA registers); other addresses are granted and
// read as zero.
// TCDM port 0 is shared by the core's loads/stores, the FP loads/stores and
// SSR stream 0, with priority in that order; port 1 belongs to SSR stream 1.
// The fence instruction waits until the sequencer and the FPU subsystem are
// idle.
// The composition follows the paper's cluster figure (Snitch, FPU
// sequencer, FPU subsystem, L0 instruction cache, two TCDM ports per core
// complex); the address map and the port sharing are this design's choices.
module core_complex
  import manticore_pkg::*;
(
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic [31:0]        hart_id_i,
  input  logic               fetch_en_i,
  // to the shared instruction cache
  output logic               ic_req_valid_o,
  output logic [WIDE_AW-1:0] ic_req_addr_o,
  input  logic               ic_req_ready_i,
  input  logic               ic_rsp_valid_i,
  input  logic [WIDE_DW-1:0] ic_rsp_data_i,
  // two TCDM ports
  output logic      [1:0]    tcdm_valid_o,
  output tcdm_req_t [1:0]    tcdm_req_o,
  input  logic      [1:0]    tcdm_gnt_i,
  input  logic      [1:0]    tcdm_rvalid_i,
  input  logic [1:0][63:0]   tcdm_rdata_i,
  // cluster peripherals
  output logic               periph_valid_o,
  output logic               periph_we_o,
  output logic [7:0]         periph_addr_o,
  output logic [31:0]        periph_wdata_o,
  input  logic [31:0]        periph_rdata_i,
  // status
  output logic               halted_o,
  output logic               fpu_issue_o,   // an FPU operation issued this cycle
  output logic               frep_busy_o    // the sequencer records or replays a loop
);
  // ---------------- core ----------------
  logic        if_valid, if_ready;
  logic [31:0] if_addr, if_data;
  logic        d_valid, d_we, d_gnt, d_rvalid;
  logic [31:0] d_addr, d_wdata, d_rdata;
  logic [3:0]  d_strb;
  logic        acc_valid, acc_ready, fp_idle, retire;
  offload_t    acc;

  snitch_core i_core (
    .clk_i, .rst_ni, .hart_id_i, .fetch_en_i,
    .imem_valid_o(if_valid), .imem_addr_o(if_addr), .imem_ready_i(if_ready), .imem_data_i(if_data),
    .dmem_valid_o(d_valid), .dmem_addr_o(d_addr), .dmem_we_o(d_we), .dmem_wdata_o(d_wdata),
    .dmem_strb_o(d_strb), .dmem_gnt_i(d_gnt), .dmem_rvalid_i(d_rvalid), .dmem_rdata_i(d_rdata),
    .acc_valid_o(acc_valid), .acc_o(acc), .acc_ready_i(acc_ready), .fp_idle_i(fp_idle),
    .halted_o, .retire_o(retire)
  );

  l0_icache i_l0 (
    .clk_i, .rst_ni,
    .fetch_valid_i(if_valid), .fetch_addr_i(if_addr), .fetch_ready_o(if_ready), .fetch_data_o(if_data),
    .req_valid_o(ic_req_valid_o), .req_addr_o(ic_req_addr_o), .req_ready_i(ic_req_ready_i),
    .rsp_valid_i(ic_rsp_valid_i), .rsp_data_i(ic_rsp_data_i)
  );

  // ---------------- FP side ----------------
  logic     sq_valid, sq_ready, seq_busy;
  offload_t sq;
  frep_sequencer i_seq (
    .clk_i, .rst_ni,
    .in_valid_i(acc_valid), .in_ready_o(acc_ready), .in_i(acc),
    .out_valid_o(sq_valid), .out_ready_i(sq_ready), .out_o(sq), .busy_o(seq_busy)
  );

  logic             fl_valid, fl_gnt, fl_rvalid, fps_idle, ssr_en;
  tcdm_req_t        fl_req;
  logic [1:0][63:0] ssr_rdata, ssr_wdata;
  logic [1:0]       ssr_rvalid, ssr_pop, ssr_push, ssr_wready;

  fp_subsystem i_fps (
    .clk_i, .rst_ni,
    .in_valid_i(sq_valid), .in_ready_o(sq_ready), .in_i(sq),
    .lsu_valid_o(fl_valid), .lsu_req_o(fl_req), .lsu_gnt_i(fl_gnt), .lsu_rvalid_i(fl_rvalid),
    .lsu_rdata_i(tcdm_rdata_i[0]),
    .ssr_en_i(ssr_en), .ssr_rdata_i(ssr_rdata), .ssr_rvalid_i(ssr_rvalid), .ssr_pop_o(ssr_pop),
    .ssr_wdata_o(ssr_wdata), .ssr_push_o(ssr_push), .ssr_wready_i(ssr_wready),
    .idle_o(fps_idle), .fpu_busy_o(fpu_issue_o)
  );
  assign fp_idle     = fps_idle && !seq_busy && !acc_valid;
  assign frep_busy_o = seq_busy;

  // ---------------- SSRs ----------------
  logic             cfg_valid;
  logic [31:0]      cfg_rdata;
  logic [1:0]       s_valid, s_gnt, s_rvalid;
  tcdm_req_t [1:0]  s_req;

  ssr_streamer #(.NUM_SSR(2)) i_ssr (
    .clk_i, .rst_ni,
    .cfg_valid_i(cfg_valid), .cfg_we_i(d_we), .cfg_addr_i(d_addr[11:0]), .cfg_wdata_i(d_wdata),
    .cfg_rdata_o(cfg_rdata), .ssr_en_o(ssr_en),
    .tcdm_valid_o(s_valid), .tcdm_req_o(s_req), .tcdm_gnt_i(s_gnt), .tcdm_rvalid_i(s_rvalid),
    .tcdm_rdata_i(tcdm_rdata_i),
    .rdata_o(ssr_rdata), .rvalid_o(ssr_rvalid), .pop_i(ssr_pop),
    .wdata_i(ssr_wdata), .push_i(ssr_push), .wready_o(ssr_wready)
  );

  // ---------------- core data access decode ----------------
  logic to_tcdm, to_ssr, to_periph, local_q;
  logic [31:0] local_rdata_q;
  assign to_tcdm   = (d_addr[31:17] == TCDM_BASE[31:17]);
  assign to_ssr    = (d_addr[31:16] == SSR_BASE[31:16]);
  assign to_periph = (d_addr[31:16] == PERIPH_BASE[31:16]);
  assign cfg_valid = d_valid && to_ssr;
  assign periph_valid_o = d_valid && to_periph;
  assign periph_we_o    = d_we;
  assign periph_addr_o  = d_addr[7:0];
  assign periph_wdata_o = d_wdata;

  // ---------------- TCDM port 0 arbitration ----------------
  typedef enum logic [1:0] {OWN_CORE, OWN_FP, OWN_SSR} owner_e;
  owner_e owner, owner_q;
  logic   core_t;
  assign core_t = d_valid && to_tcdm;

  always_comb begin
    owner = core_t ? OWN_CORE : fl_valid ? OWN_FP : OWN_SSR;
    tcdm_valid_o[0] = core_t || fl_valid || s_valid[0];
    unique case (owner)
      OWN_CORE: begin
        tcdm_req_o[0].addr  = d_addr;
        tcdm_req_o[0].we    = d_we;
        tcdm_req_o[0].wdata = {d_wdata, d_wdata};
        tcdm_req_o[0].strb  = d_addr[2] ? {d_strb, 4'b0} : {4'b0, d_strb};
      end
      OWN_FP:  tcdm_req_o[0] = fl_req;
      default: tcdm_req_o[0] = s_req[0];
    endcase
    tcdm_valid_o[1] = s_valid[1];
    tcdm_req_o[1]   = s_req[1];
    fl_gnt   = (owner == OWN_FP)  && tcdm_gnt_i[0];
    s_gnt[0] = (owner == OWN_SSR) && tcdm_gnt_i[0];
    s_gnt[1] = tcdm_gnt_i[1];
    fl_rvalid   = tcdm_rvalid_i[0] && (owner_q == OWN_FP);
    s_rvalid[0] = tcdm_rvalid_i[0] && (owner_q == OWN_SSR);
    s_rvalid[1] = tcdm_rvalid_i[1];
    // core
    d_gnt    = (to_tcdm ? (owner == OWN_CORE) && tcdm_gnt_i[0] : 1'b1);
    d_rvalid = (tcdm_rvalid_i[0] && owner_q == OWN_CORE) || local_q;
    d_rdata  = local_q ? local_rdata_q : (d_addr[2] ? tcdm_rdata_i[0][63:32] : tcdm_rdata_i[0][31:0]);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      owner_q <= OWN_CORE;
      local_q <= 1'b0;
      local_rdata_q <= '0;
    end else begin
      if (tcdm_valid_o[0] && tcdm_gnt_i[0]) owner_q <= owner;
      local_q <= d_valid && !to_tcdm && !d_we;
      local_rdata_q <= to_ssr ? cfg_rdata : to_periph ? periph_rdata_i : 32'd0;
    end
  end

endmodule
