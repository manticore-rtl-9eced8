// l2_memory: the chiplet's shared L2 memory, SIZE_BYTES of on-chip SRAM
// organised as 512-bit lines.
//
// Port a is the wide bus from the chiplet crossbar: always ready, one
// request per cycle, the response (read data, or an acknowledge for a
// write) one cycle after acceptance. Port b is a simple line port for the
// host side (PCIe endpoint and management cores, which are not built):
// host_we_i writes a line with byte strobes; host_rdata_o returns the line
// at host_addr_i one cycle later. Bus addresses are global (L2_BASE
// upwards), host addresses are relative to the start of the L2; the line
// index wraps modulo the size.
// Follows the paper: "a 27 MB of L2 memory" (taken as 27 MiB). The
// single-cycle latency and the two ports are this design's choices.
module l2_memory
  import manticore_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 27 * 1024 * 1024
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               valid_i,
  input  wide_req_t          req_i,
  output logic               ready_o,
  output logic               rsp_valid_o,
  output wide_rsp_t          rsp_o,
  input  logic               host_valid_i,
  input  logic               host_we_i,
  input  logic [31:0]        host_addr_i,
  input  logic [WIDE_DW-1:0] host_wdata_i,
  input  logic [WIDE_SW-1:0] host_strb_i,
  output logic [WIDE_DW-1:0] host_rdata_o
);
  localparam int unsigned LINES = SIZE_BYTES / 64;
  localparam int unsigned IW    = $clog2(LINES);

  logic [WIDE_DW-1:0] mem_q [LINES];

  function automatic logic [IW-1:0] line_of(logic [WIDE_AW-1:0] a);
    logic [WIDE_AW-1:0] l;
    l = (a[31:0] >> 6) % WIDE_AW'(LINES);
    return l[IW-1:0];
  endfunction

  assign ready_o = 1'b1;

  logic [IW-1:0] ia, ib;
  assign ia = line_of(req_i.addr - WIDE_AW'(L2_BASE));
  assign ib = line_of(WIDE_AW'(host_addr_i));

  always_ff @(posedge clk_i) begin
    if (valid_i && req_i.we) begin
      for (int b = 0; b < WIDE_SW; b++)
        if (req_i.strb[b]) mem_q[ia][8*b +: 8] <= req_i.wdata[8*b +: 8];
    end
    if (valid_i && !req_i.we) rsp_o.rdata <= mem_q[ia];
    if (host_valid_i && host_we_i) begin
      for (int b = 0; b < WIDE_SW; b++)
        if (host_strb_i[b]) mem_q[ib][8*b +: 8] <= host_wdata_i[8*b +: 8];
    end
    if (host_valid_i && !host_we_i) host_rdata_o <= mem_q[ib];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) rsp_valid_o <= 1'b0;
    else         rsp_valid_o <= valid_i;
  end
endmodule
