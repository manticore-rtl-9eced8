// ssr_streamer: the stream semantic registers (SSRs) of one core complex.
//
// Each of the NUM_SSR streams turns accesses to one FP register (ft0, ft1)
// into memory traffic. A stream walks a loop nest of up to NUM_DIMS
// dimensions; dimension d runs bound_d+1 times and adds stride_d bytes to the
// address, so the element address is base + sum(idx_d * stride_d). A read
// stream fetches ahead into a FIFO of FIFO_DEPTH elements, and every read of
// the register by the FPU subsystem pops one element. A write stream takes
// each value written to the register and stores it at the next address.
// Each stream has its own narrow TCDM port (request/grant in the same cycle,
// read data one cycle after the grant), so a stream delivers one element per
// cycle when it meets no bank conflict.
//
// Configuration is memory-mapped (offsets in manticore_pkg): per stream the
// bounds, strides and number of dimensions, then a write of the read or write
// base pointer starts the stream. A global enable register (offset 0x7C0)
// gives ft0/ft1 their stream semantics. The paper describes what SSRs do and
// shows a configuration step ahead of the loop; the register layout, the
// number of dimensions and the FIFO depth are this design's choices.
module ssr_streamer
  import manticore_pkg::*;
#(
  parameter int unsigned NUM_SSR    = 2,
  parameter int unsigned NUM_DIMS   = 4,
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic                      clk_i,
  input  logic                      rst_ni,
  // configuration port (word accesses)
  input  logic                      cfg_valid_i,
  input  logic                      cfg_we_i,
  input  logic [11:0]               cfg_addr_i,
  input  logic [31:0]               cfg_wdata_i,
  output logic [31:0]               cfg_rdata_o,
  output logic                      ssr_en_o,
  // TCDM ports
  output logic      [NUM_SSR-1:0]   tcdm_valid_o,
  output tcdm_req_t [NUM_SSR-1:0]   tcdm_req_o,
  input  logic      [NUM_SSR-1:0]   tcdm_gnt_i,
  input  logic      [NUM_SSR-1:0]   tcdm_rvalid_i,
  input  logic [NUM_SSR-1:0][63:0]  tcdm_rdata_i,
  // register side
  output logic [NUM_SSR-1:0][63:0]  rdata_o,
  output logic      [NUM_SSR-1:0]   rvalid_o,   // read data available
  input  logic      [NUM_SSR-1:0]   pop_i,
  input  logic [NUM_SSR-1:0][63:0]  wdata_i,
  input  logic      [NUM_SSR-1:0]   push_i,
  output logic      [NUM_SSR-1:0]   wready_o    // space for a written value
);
  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);
  localparam int unsigned PW = $clog2(FIFO_DEPTH);

  logic en_q;
  assign ssr_en_o = en_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) en_q <= 1'b0;
    else if (cfg_valid_i && cfg_we_i && cfg_addr_i == SSR_ENABLE_OFS) en_q <= cfg_wdata_i[0];
  end

  logic [NUM_SSR-1:0][31:0] status;

  for (genvar s = 0; s < NUM_SSR; s++) begin : g_ssr
    logic [NUM_DIMS-1:0][31:0] bound_q, stride_q, idx_q, off_q;
    logic [1:0]                dims_q;
    logic [31:0]               base_q;
    logic                      active_q, write_q, inflight_q;
    logic [FIFO_DEPTH-1:0][63:0] fifo_q;
    logic [PW-1:0]             rd_ptr_q, wr_ptr_q;
    logic [CW-1:0]             cnt_q;
    logic                      cfg_sel, fifo_push, fifo_pop, req, last;
    logic [63:0]               fifo_wdata;
    logic [31:0]               addr;

    assign cfg_sel = cfg_valid_i && cfg_we_i && (cfg_addr_i[11:8] == 4'(s));

    always_comb begin
      addr = base_q;
      for (int d = 0; d < int'(NUM_DIMS); d++) addr = addr + off_q[d];
      // the current element is the last one when every active dim is at its bound
      last = 1'b1;
      for (int d = 0; d < int'(NUM_DIMS); d++)
        if (d <= int'(dims_q) && idx_q[d] != bound_q[d]) last = 1'b0;
    end

    // request generation
    always_comb begin
      if (write_q) req = active_q && (cnt_q != 0);
      else         req = active_q && (32'(cnt_q) + 32'(inflight_q) + 1 <= FIFO_DEPTH);
      tcdm_valid_o[s]       = req;
      tcdm_req_o[s].addr    = addr;
      tcdm_req_o[s].we      = write_q;
      tcdm_req_o[s].wdata   = fifo_q[rd_ptr_q];
      tcdm_req_o[s].strb    = '1;
    end

    // FIFO: read streams fill from memory, write streams from the register
    assign fifo_push  = write_q ? push_i[s] : tcdm_rvalid_i[s];
    assign fifo_wdata = write_q ? wdata_i[s] : tcdm_rdata_i[s];
    assign fifo_pop   = write_q ? (req && tcdm_gnt_i[s]) : pop_i[s];
    assign rdata_o[s]  = fifo_q[rd_ptr_q];
    assign rvalid_o[s] = !write_q && (cnt_q != 0);
    assign wready_o[s] = write_q && active_q && (32'(cnt_q) < FIFO_DEPTH);
    assign status[s]   = {31'd0, !active_q && (cnt_q == 0)};

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        bound_q <= '0; stride_q <= '0; idx_q <= '0; off_q <= '0;
        dims_q <= '0; base_q <= '0; active_q <= 1'b0; write_q <= 1'b0; inflight_q <= 1'b0;
        rd_ptr_q <= '0; wr_ptr_q <= '0; cnt_q <= '0;
      end else begin
        inflight_q <= !write_q && req && tcdm_gnt_i[s];
        // address walk
        if (req && tcdm_gnt_i[s]) begin
          if (last) active_q <= 1'b0;
          begin
            logic carry;
            carry = 1'b1;
            for (int d = 0; d < int'(NUM_DIMS); d++) begin
              if (carry) begin
                if (idx_q[d] == bound_q[d] || d > int'(dims_q)) begin
                  idx_q[d] <= '0;
                  off_q[d] <= '0;
                end else begin
                  idx_q[d] <= idx_q[d] + 1;
                  off_q[d] <= off_q[d] + stride_q[d];
                  carry = 1'b0;
                end
              end
            end
          end
        end
        // FIFO
        if (fifo_push) wr_ptr_q <= (32'(wr_ptr_q) == FIFO_DEPTH - 1) ? '0 : wr_ptr_q + 1'b1;
        if (fifo_pop)  rd_ptr_q <= (32'(rd_ptr_q) == FIFO_DEPTH - 1) ? '0 : rd_ptr_q + 1'b1;
        cnt_q <= cnt_q + CW'(fifo_push) - CW'(fifo_pop);
        // configuration
        if (cfg_sel) begin
          unique case (cfg_addr_i[7:5])
            3'd0: bound_q[32'(cfg_addr_i[4:2]) % NUM_DIMS]  <= cfg_wdata_i;
            3'd1: stride_q[32'(cfg_addr_i[4:2]) % NUM_DIMS] <= cfg_wdata_i;
            3'd2: dims_q <= cfg_wdata_i[1:0];
            3'd3: begin
              base_q   <= cfg_wdata_i;
              write_q  <= cfg_addr_i[2];   // 0x60 read, 0x64 write
              active_q <= 1'b1;
              idx_q    <= '0;
              off_q    <= '0;
              rd_ptr_q <= '0;
              wr_ptr_q <= '0;
              cnt_q    <= '0;
            end
            default: ;
          endcase
        end
      end
    end

    always_ff @(posedge clk_i) begin
      if (fifo_push) fifo_q[wr_ptr_q] <= fifo_wdata;
    end
  end

  always_comb begin
    cfg_rdata_o = '0;
    if (cfg_addr_i == SSR_ENABLE_OFS) cfg_rdata_o = {31'd0, en_q};
    else
      for (int s = 0; s < int'(NUM_SSR); s++)
        if (cfg_addr_i[11:8] == 4'(s)) cfg_rdata_o = status[s];
  end

  // a stream must not be pushed when it has no space, nor popped when empty
  for (genvar s = 0; s < NUM_SSR; s++) begin : g_assert
    assert property (@(posedge clk_i) disable iff (!rst_ni) push_i[s] |-> wready_o[s]);
    assert property (@(posedge clk_i) disable iff (!rst_ni) pop_i[s] |-> rvalid_o[s]);
  end

endmodule
