// icache: a read-only instruction cache shared by NUM_PORTS requesters, used
// as the cluster's shared instruction cache (8 requesters, the L0 caches of
// the eight cores) and as the instruction cache of S1 and S2 quadrants
// (requesters: the caches one level down).
//
// Each port asks for a whole line (LINE_BYTES, one 512-bit beat of the wide
// bus): req_valid_i/req_ready_o hand over a line address, and rsp_valid_o
// pulses one or more cycles later with the line on rsp_data_o. A port keeps
// at most one request open. Each cycle the cache accepts one request,
// chosen round-robin, and looks it up; a hit answers on the next cycle. A
// miss blocks the cache while the line is fetched over the refill port (a
// wide-bus master that marks its reads as instruction refills), then answers.
//
// The paper gives the sharing (eight cores per cluster, and quadrants sharing
// an instruction cache) and the 8 KiB cluster size. Direct mapping, the line
// size, the blocking refill and the round-robin lookup are this design's
// simplest choices. No invalidation.
module icache
  import manticore_pkg::*;
#(
  parameter int unsigned NUM_PORTS  = 8,
  parameter int unsigned SIZE_BYTES = 8192,
  parameter int unsigned LINE_BYTES = 64
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic [NUM_PORTS-1:0]       req_valid_i,
  input  logic [NUM_PORTS-1:0][WIDE_AW-1:0] req_addr_i,
  output logic [NUM_PORTS-1:0]       req_ready_o,
  output logic [NUM_PORTS-1:0]       rsp_valid_o,
  output logic [WIDE_DW-1:0]         rsp_data_o,
  // refill port (wide bus master)
  output logic                       refill_valid_o,
  output wide_req_t                  refill_req_o,
  input  logic                       refill_ready_i,
  input  logic                       refill_rsp_valid_i,
  input  wide_rsp_t                  refill_rsp_i,
  output logic                       miss_o        // pulses on every miss
);
  localparam int unsigned LINES = SIZE_BYTES / LINE_BYTES;
  localparam int unsigned OW    = $clog2(LINE_BYTES);
  localparam int unsigned IW    = $clog2(LINES);
  localparam int unsigned TW    = WIDE_AW - OW - IW;
  localparam int unsigned PW    = (NUM_PORTS > 1) ? $clog2(NUM_PORTS) : 1;

  logic [WIDE_DW-1:0] data_q [LINES];
  logic [TW-1:0]      tag_q  [LINES];
  logic [LINES-1:0]   vld_q;

  typedef enum logic [1:0] {S_LOOKUP, S_REQ, S_WAIT} state_e;
  state_e          state_q;
  logic [PW-1:0]   rr_q, sel, miss_port_q;
  logic            sel_valid, hit;
  logic [WIDE_AW-1:0] sel_addr, miss_addr_q;
  logic [IW-1:0]   idx;
  logic [TW-1:0]   tag;
  logic [NUM_PORTS-1:0] rsp_q;
  logic [WIDE_DW-1:0]   rsp_data_q;

  // round-robin choice among ports with an open request not being answered
  always_comb begin
    sel = '0;
    sel_valid = 1'b0;
    for (int k = NUM_PORTS - 1; k >= 0; k--) begin
      logic signed [31:0] p;
      p = (int'(rr_q) + k) % int'(NUM_PORTS);
      if (req_valid_i[p] && !rsp_q[p]) begin
        sel = PW'(p);
        sel_valid = 1'b1;
      end
    end
    sel_addr = req_addr_i[sel];
    idx = sel_addr[OW +: IW];
    tag = sel_addr[WIDE_AW-1 -: TW];
    hit = vld_q[idx] && (tag_q[idx] == tag);
    req_ready_o = '0;
    if (state_q == S_LOOKUP && sel_valid) req_ready_o[sel] = 1'b1;
  end

  assign miss_o = (state_q == S_LOOKUP) && sel_valid && !hit;

  assign refill_valid_o     = (state_q == S_REQ);
  assign refill_req_o.addr  = {miss_addr_q[WIDE_AW-1:OW], {OW{1'b0}}};
  assign refill_req_o.we    = 1'b0;
  assign refill_req_o.instr = 1'b1;
  assign refill_req_o.wdata = '0;
  assign refill_req_o.strb  = '0;
  assign rsp_valid_o = rsp_q;
  assign rsp_data_o  = rsp_data_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q     <= S_LOOKUP;
      rr_q        <= '0;
      vld_q       <= '0;
      rsp_q       <= '0;
      miss_port_q <= '0;
      miss_addr_q <= '0;
    end else begin
      rsp_q <= '0;
      unique case (state_q)
        S_LOOKUP: if (sel_valid) begin
          rr_q <= (32'(sel) == NUM_PORTS - 1) ? '0 : sel + 1'b1;
          if (hit) rsp_q[sel] <= 1'b1;
          else begin
            miss_port_q <= sel;
            miss_addr_q <= sel_addr;
            state_q     <= S_REQ;
          end
        end
        S_REQ: if (refill_ready_i) state_q <= S_WAIT;
        default: if (refill_rsp_valid_i) begin
          vld_q[miss_addr_q[OW +: IW]] <= 1'b1;
          rsp_q[miss_port_q] <= 1'b1;
          state_q <= S_LOOKUP;
        end
      endcase
    end
  end

  always_ff @(posedge clk_i) begin
    if (state_q == S_LOOKUP && sel_valid && hit) rsp_data_q <= data_q[idx];
    if (state_q == S_WAIT && refill_rsp_valid_i) begin
      data_q[miss_addr_q[OW +: IW]] <= refill_rsp_i.rdata;
      tag_q[miss_addr_q[OW +: IW]]  <= miss_addr_q[WIDE_AW-1 -: TW];
      rsp_data_q <= refill_rsp_i.rdata;
    end
  end

endmodule
