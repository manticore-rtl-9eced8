// tcdm: the cluster's tightly coupled data memory, a shared L1 scratchpad of
// SIZE_BYTES in NUM_BANKS banks of 64-bit words, with its interconnect.
//
// Consecutive 64-bit words lie in consecutive banks (word interleaving), so
// unit-stride streams from several cores spread over the banks. Each narrow
// port (two per core complex) sends a request and is granted in the same
// cycle unless another port wins the same bank; the loser keeps its request
// up and retries (a bank conflict, counted on conflicts_o). Each bank picks
// among the narrow ports round-robin. Read data returns one cycle after the
// grant.
// The DMA's wide port covers eight adjacent banks (one 512-bit line) and
// has priority over the narrow ports on those banks, so a DMA beat is granted
// in one cycle whenever it is presented.
// Size, bank count and the 512-bit DMA width follow the paper; the bank
// width, interleaving and arbitration are this design's choices (the paper
// only notes that bank conflicts stall L1 accesses).
module tcdm
  import manticore_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 131072,
  parameter int unsigned NUM_BANKS  = 32,
  parameter int unsigned NUM_PORTS  = 16
) (
  input  logic                         clk_i,
  input  logic                         rst_ni,
  // narrow ports
  input  logic      [NUM_PORTS-1:0]    req_valid_i,
  input  tcdm_req_t [NUM_PORTS-1:0]    req_i,
  output logic      [NUM_PORTS-1:0]    gnt_o,
  output logic      [NUM_PORTS-1:0]    rvalid_o,
  output logic [NUM_PORTS-1:0][63:0]   rdata_o,
  // wide DMA port
  input  logic                         dma_valid_i,
  input  logic [31:0]                  dma_addr_i,
  input  logic                         dma_we_i,
  input  logic [WIDE_DW-1:0]           dma_wdata_i,
  input  logic [WIDE_SW-1:0]           dma_strb_i,
  output logic                         dma_gnt_o,
  output logic                         dma_rvalid_o,
  output logic [WIDE_DW-1:0]           dma_rdata_o,
  output logic [$clog2(NUM_PORTS+1)-1:0] conflicts_o
);
  localparam int unsigned DEPTH = SIZE_BYTES / 8 / NUM_BANKS;
  localparam int unsigned BW    = $clog2(NUM_BANKS);
  localparam int unsigned RW    = $clog2(DEPTH);
  localparam int unsigned PW    = $clog2(NUM_PORTS);
  localparam int unsigned DMA_BANKS = WIDE_DW / 64;

  // address decode
  logic [NUM_PORTS-1:0][BW-1:0] p_bank;
  logic [NUM_PORTS-1:0][RW-1:0] p_row;
  logic [BW-1:0] d_bank0;
  logic [RW-1:0] d_row;
  always_comb begin
    for (int p = 0; p < int'(NUM_PORTS); p++) begin
      p_bank[p] = req_i[p].addr[3 +: BW];
      p_row[p]  = req_i[p].addr[3 + BW +: RW];
    end
    d_bank0 = dma_addr_i[3 +: BW] & ~BW'(DMA_BANKS - 1);
    d_row   = dma_addr_i[3 + BW +: RW];
  end

  logic [NUM_BANKS-1:0]          b_dma, b_req;
  logic [NUM_BANKS-1:0][PW-1:0]  b_sel;
  logic [NUM_BANKS-1:0][PW-1:0]  rr_q;

  // per-bank arbitration
  always_comb begin
    gnt_o = '0;
    for (int b = 0; b < int'(NUM_BANKS); b++) begin
      b_dma[b] = dma_valid_i && (b / int'(DMA_BANKS) == int'(d_bank0) / int'(DMA_BANKS));
      b_req[b] = 1'b0;
      b_sel[b] = '0;
      for (int k = int'(NUM_PORTS) - 1; k >= 0; k--) begin
        logic signed [31:0] p;
        p = (int'(rr_q[b]) + k) % int'(NUM_PORTS);
        if (req_valid_i[p] && p_bank[p] == BW'(b)) begin
          b_req[b] = 1'b1;
          b_sel[b] = PW'(p);
        end
      end
      if (b_req[b] && !b_dma[b]) gnt_o[b_sel[b]] = 1'b1;
    end
    conflicts_o = '0;
    for (int p = 0; p < int'(NUM_PORTS); p++)
      if (req_valid_i[p] && !gnt_o[p]) conflicts_o = conflicts_o + 1'b1;
  end
  assign dma_gnt_o = dma_valid_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) rr_q <= '0;
    else
      for (int b = 0; b < int'(NUM_BANKS); b++)
        if (b_req[b] && !b_dma[b])
          rr_q[b] <= (32'(b_sel[b]) == NUM_PORTS - 1) ? '0 : b_sel[b] + 1'b1;
  end

  // banks
  logic [NUM_BANKS-1:0][63:0] b_rdata;
  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    logic [63:0] mem [DEPTH];
    logic        en, we;
    logic [RW-1:0] row;
    logic [63:0] wdata;
    logic [7:0]  strb;
    always_comb begin
      if (b_dma[b]) begin
        en = 1'b1; we = dma_we_i; row = d_row;
        wdata = dma_wdata_i[64*(b % DMA_BANKS) +: 64];
        strb  = dma_strb_i[8*(b % DMA_BANKS) +: 8];
      end else begin
        en = b_req[b]; we = req_i[b_sel[b]].we; row = p_row[b_sel[b]];
        wdata = req_i[b_sel[b]].wdata; strb = req_i[b_sel[b]].strb;
      end
    end
    always_ff @(posedge clk_i) begin
      if (en) begin
        if (we) begin
          for (int i = 0; i < 8; i++) if (strb[i]) mem[row][8*i +: 8] <= wdata[8*i +: 8];
        end else begin
          b_rdata[b] <= mem[row];
        end
      end
    end
  end

  // read responses, one cycle after the grant
  logic [NUM_PORTS-1:0][BW-1:0] p_bank_q;
  logic [BW-1:0] d_bank0_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rvalid_o <= '0; p_bank_q <= '0; dma_rvalid_o <= 1'b0; d_bank0_q <= '0;
    end else begin
      for (int p = 0; p < int'(NUM_PORTS); p++) rvalid_o[p] <= gnt_o[p] && !req_i[p].we;
      p_bank_q <= p_bank;
      dma_rvalid_o <= dma_valid_i && !dma_we_i;
      d_bank0_q <= d_bank0;
    end
  end
  always_comb begin
    for (int p = 0; p < int'(NUM_PORTS); p++) rdata_o[p] = b_rdata[p_bank_q[p]];
    for (int i = 0; i < int'(DMA_BANKS); i++) dma_rdata_o[64*i +: 64] = b_rdata[d_bank0_q + BW'(i)];
  end

endmodule
