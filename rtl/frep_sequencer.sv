// frep_sequencer: the FPU sequencer (FREP micro-loop buffer) that sits between
// the integer core and the FPU subsystem.
//
// The core offloads every FP instruction, together with one integer operand,
// into this block. Normally the block passes instructions straight through.
// An frep instruction is consumed here: it names how many of the following
// FP instructions form the loop body (imm[11:0], 1..DEPTH) and how many times
// the body is executed (the rs1 value; 0 is treated as 1). The body is
// forwarded once while it is written into the buffer; the buffer then replays
// it for the remaining iterations without the core's help. While the buffer
// replays, in_ready_o is low, so the core stalls only when it offloads the
// next FP instruction, and its integer pipeline runs on in parallel. That is
// the paper's "pseudo-dual-issue" operation.
//
// Follows the paper: a buffer of 16 instructions between core and FPU that
// replays a range of FP instructions a configurable number of times.
// This design's own choices: the encoding (opcode custom-0, rs1 = iteration
// count, imm = body length; Fig. 8 prints "frep t0, 4"), no nested loops, no
// register staggering. Interface: valid/ready on both sides, zero latency
// when passing through; one instruction per cycle when replaying.
module frep_sequencer
  import manticore_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  logic     in_valid_i,
  output logic     in_ready_o,
  input  offload_t in_i,
  output logic     out_valid_o,
  input  logic     out_ready_i,
  output offload_t out_o,
  output logic     busy_o
);
  localparam int unsigned IW = $clog2(DEPTH);

  typedef enum logic [1:0] {S_PASS, S_RECORD, S_REPLAY} state_e;
  state_e         state_q;
  offload_t       buf_q [DEPTH];
  logic [IW-1:0]  ptr_q;
  logic [IW:0]    len_q;      // body length
  logic [31:0]    iter_q, reps_q;

  logic is_frep;
  assign is_frep = (in_i.instr[6:0] == OPC_FREP);

  always_comb begin
    out_valid_o = 1'b0;
    out_o       = in_i;
    in_ready_o  = 1'b0;
    unique case (state_q)
      S_PASS: begin
        in_ready_o  = is_frep ? 1'b1 : out_ready_i;
        out_valid_o = in_valid_i && !is_frep;
      end
      S_RECORD: begin
        in_ready_o  = out_ready_i;
        out_valid_o = in_valid_i;
      end
      default: begin  // S_REPLAY
        out_valid_o = 1'b1;
        out_o       = buf_q[ptr_q];
      end
    endcase
  end

  assign busy_o = (state_q != S_PASS);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_PASS;
      ptr_q   <= '0;
      len_q   <= '0;
      iter_q  <= '0;
      reps_q  <= '0;
    end else begin
      unique case (state_q)
        S_PASS: if (in_valid_i && is_frep) begin
          logic [11:0] n;
          n = in_i.instr[31:20];
          len_q   <= (n == 0) ? (IW+1)'(1) : (n > 12'(DEPTH)) ? (IW+1)'(DEPTH) : (IW+1)'(n);
          reps_q  <= (in_i.op == 0) ? 32'd1 : in_i.op;
          ptr_q   <= '0;
          iter_q  <= 32'd1;
          state_q <= S_RECORD;
        end
        S_RECORD: if (in_valid_i && out_ready_i) begin
          if ((IW+1)'(ptr_q) + 1 == len_q) begin
            ptr_q   <= '0;
            state_q <= (reps_q == 32'd1) ? S_PASS : S_REPLAY;
          end else begin
            ptr_q <= ptr_q + 1'b1;
          end
        end
        default: if (out_ready_i) begin
          if ((IW+1)'(ptr_q) + 1 == len_q) begin
            ptr_q  <= '0;
            iter_q <= iter_q + 1;
            if (iter_q + 1 == reps_q) state_q <= S_PASS;
          end else begin
            ptr_q <= ptr_q + 1'b1;
          end
        end
      endcase
    end
  end

  // loop body storage (no reset needed: written before it is read)
  always_ff @(posedge clk_i) begin
    if (state_q == S_RECORD && in_valid_i && out_ready_i) buf_q[ptr_q] <= in_i;
  end

endmodule
