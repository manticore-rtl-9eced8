// l0_icache: the small level-0 instruction cache in front of each core.
// It holds NUM_LINES lines of LINE_BYTES, fully associative, and answers a
// fetch in the same cycle on a hit, so the single-stage core can retire one
// instruction per cycle in a loop. On a miss it requests the line from the
// cluster's shared instruction cache (valid/ready request, response pulse
// with the whole line) and replaces lines in FIFO order.
// The paper names this cache in its cluster figure; its size, associativity
// and replacement are this design's choices.
module l0_icache
  import manticore_pkg::*;
#(
  parameter int unsigned NUM_LINES  = 4,
  parameter int unsigned LINE_BYTES = 64
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               fetch_valid_i,
  input  logic [31:0]        fetch_addr_i,
  output logic               fetch_ready_o,
  output logic [31:0]        fetch_data_o,
  // refill towards the shared instruction cache
  output logic               req_valid_o,
  output logic [WIDE_AW-1:0] req_addr_o,
  input  logic               req_ready_i,
  input  logic               rsp_valid_i,
  input  logic [WIDE_DW-1:0] rsp_data_i
);
  localparam int unsigned OW = $clog2(LINE_BYTES);
  localparam int unsigned LW = (NUM_LINES > 1) ? $clog2(NUM_LINES) : 1;

  logic [WIDE_DW-1:0]  data_q [NUM_LINES];
  logic [31-OW:0]      tag_q  [NUM_LINES];
  logic [NUM_LINES-1:0] vld_q;
  logic [LW-1:0]       repl_q;
  logic                asked_q;
  logic                hit;
  logic [LW-1:0]       hit_line;

  always_comb begin
    hit = 1'b0;
    hit_line = '0;
    for (int l = 0; l < int'(NUM_LINES); l++)
      if (vld_q[l] && tag_q[l] == fetch_addr_i[31:OW]) begin
        hit = 1'b1;
        hit_line = LW'(l);
      end
  end

  assign fetch_ready_o = fetch_valid_i && hit;
  assign fetch_data_o  = data_q[hit_line][32*fetch_addr_i[OW-1:2] +: 32];
  assign req_valid_o   = fetch_valid_i && !hit && !asked_q;
  assign req_addr_o    = WIDE_AW'({fetch_addr_i[31:OW], {OW{1'b0}}});

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      vld_q   <= '0;
      repl_q  <= '0;
      asked_q <= 1'b0;
    end else begin
      if (req_valid_o && req_ready_i) asked_q <= 1'b1;
      if (rsp_valid_i) begin
        asked_q <= 1'b0;
        vld_q[repl_q] <= 1'b1;
        repl_q <= (32'(repl_q) == NUM_LINES - 1) ? '0 : repl_q + 1'b1;
      end
    end
  end

  // the fetch address is held while a refill is open, so the returned line
  // belongs to it
  always_ff @(posedge clk_i) begin
    if (rsp_valid_i) begin
      data_q[repl_q] <= rsp_data_i;
      tag_q[repl_q]  <= fetch_addr_i[31:OW];
    end
  end

endmodule
