// dma_engine: the cluster's DMA engine, which moves blocks of data between
// the global address space (L2, HBM) and the cluster's TCDM in 512-bit beats.
//
// A core programs it through memory-mapped registers (offsets in
// manticore_pkg): a 48-bit source and destination address, a length in
// bytes, then a write to START. If the source lies in the TCDM the transfer
// goes outwards (TCDM read, wide-bus write), otherwise inwards (wide-bus
// read, TCDM write). Each 64-byte beat is read, then written; one beat is in
// flight at a time. BUSY reads 1 while a transfer runs, DONE counts finished
// transfers. Addresses must be 64-byte aligned and the length a multiple of
// 64 bytes.
// The paper gives the purpose and the 512-bit data bus; the register
// interface, the one-dimensional transfers and the one-beat-at-a-time
// sequencing are this design's choices (the original Snitch DMA is driven by
// custom instructions and keeps many beats in flight).
module dma_engine
  import manticore_pkg::*;
(
  input  logic               clk_i,
  input  logic               rst_ni,
  // register port
  input  logic               reg_valid_i,
  input  logic               reg_we_i,
  input  logic [7:0]         reg_addr_i,
  input  logic [31:0]        reg_wdata_i,
  output logic [31:0]        reg_rdata_o,
  // wide bus master
  output logic               m_valid_o,
  output wide_req_t          m_req_o,
  input  logic               m_ready_i,
  input  logic               m_rsp_valid_i,
  input  wide_rsp_t          m_rsp_i,
  // wide TCDM port
  output logic               t_valid_o,
  output logic [31:0]        t_addr_o,
  output logic               t_we_o,
  output logic [WIDE_DW-1:0] t_wdata_o,
  output logic [WIDE_SW-1:0] t_strb_o,
  input  logic               t_gnt_i,
  input  logic               t_rvalid_i,
  input  logic [WIDE_DW-1:0] t_rdata_i,
  output logic               busy_o
);
  typedef enum logic [2:0] {S_IDLE, S_RD_REQ, S_RD_WAIT, S_WR_REQ, S_WR_WAIT} state_e;
  state_e              state_q;
  logic [WIDE_AW-1:0]  src_q, dst_q;
  logic [31:0]         len_q, off_q, done_q;
  logic                out_q;     // 1: TCDM -> global
  logic [WIDE_DW-1:0]  buf_q;

  function automatic logic in_tcdm(logic [WIDE_AW-1:0] a);
    return (a[WIDE_AW-1:17] == (WIDE_AW-17)'(TCDM_BASE >> 17));
  endfunction

  assign busy_o = (state_q != S_IDLE);

  // register read
  always_comb begin
    unique case (reg_addr_i)
      8'h00: reg_rdata_o = src_q[31:0];
      8'h04: reg_rdata_o = 32'(src_q[WIDE_AW-1:32]);
      8'h08: reg_rdata_o = dst_q[31:0];
      8'h0C: reg_rdata_o = 32'(dst_q[WIDE_AW-1:32]);
      8'h10: reg_rdata_o = len_q;
      8'h18: reg_rdata_o = {31'd0, busy_o};
      8'h1C: reg_rdata_o = done_q;
      default: reg_rdata_o = '0;
    endcase
  end

  // bus requests
  logic [WIDE_AW-1:0] src_a, dst_a;
  assign src_a = src_q + WIDE_AW'(off_q);
  assign dst_a = dst_q + WIDE_AW'(off_q);

  always_comb begin
    m_valid_o     = 1'b0;
    m_req_o.addr  = out_q ? dst_a : src_a;
    m_req_o.we    = out_q;
    m_req_o.instr = 1'b0;
    m_req_o.wdata = buf_q;
    m_req_o.strb  = '1;
    t_valid_o     = 1'b0;
    t_addr_o      = out_q ? src_a[31:0] : dst_a[31:0];
    t_we_o        = !out_q;
    t_wdata_o     = buf_q;
    t_strb_o      = '1;
    unique case (state_q)
      S_RD_REQ: if (out_q) t_valid_o = 1'b1; else m_valid_o = 1'b1;
      S_WR_REQ: if (out_q) m_valid_o = 1'b1; else t_valid_o = 1'b1;
      default: ;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE; src_q <= '0; dst_q <= '0; len_q <= '0; off_q <= '0;
      done_q <= '0; out_q <= 1'b0; buf_q <= '0;
    end else begin
      if (reg_valid_i && reg_we_i && state_q == S_IDLE) begin
        unique case (reg_addr_i)
          8'h00: src_q[31:0] <= reg_wdata_i;
          8'h04: src_q[WIDE_AW-1:32] <= reg_wdata_i[WIDE_AW-33:0];
          8'h08: dst_q[31:0] <= reg_wdata_i;
          8'h0C: dst_q[WIDE_AW-1:32] <= reg_wdata_i[WIDE_AW-33:0];
          8'h10: len_q <= reg_wdata_i;
          8'h14: begin
            off_q   <= '0;
            out_q   <= in_tcdm(src_q);
            state_q <= (len_q == 0) ? S_IDLE : S_RD_REQ;
          end
          default: ;
        endcase
      end
      unique case (state_q)
        S_RD_REQ: if (out_q ? t_gnt_i : m_ready_i) state_q <= S_RD_WAIT;
        S_RD_WAIT: begin
          if (out_q && t_rvalid_i)     begin buf_q <= t_rdata_i;     state_q <= S_WR_REQ; end
          if (!out_q && m_rsp_valid_i) begin buf_q <= m_rsp_i.rdata; state_q <= S_WR_REQ; end
        end
        S_WR_REQ: begin
          if (out_q && m_ready_i) state_q <= S_WR_WAIT;
          if (!out_q && t_gnt_i) begin
            off_q <= off_q + 32'd64;
            if (off_q + 32'd64 >= len_q) begin state_q <= S_IDLE; done_q <= done_q + 1; end
            else state_q <= S_RD_REQ;
          end
        end
        S_WR_WAIT: if (m_rsp_valid_i) begin
          off_q <= off_q + 32'd64;
          if (off_q + 32'd64 >= len_q) begin state_q <= S_IDLE; done_q <= done_q + 1; end
          else state_q <= S_RD_REQ;
        end
        default: ;
      endcase
    end
  end

endmodule
