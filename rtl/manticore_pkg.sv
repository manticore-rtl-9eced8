// manticore_pkg: types, constants and the address map shared by the Manticore
// RTL. Two buses recur throughout the design:
//  * the narrow TCDM bus (64-bit data, request/grant in the same cycle, read
//    data one cycle after the grant) used by cores, SSRs and the FP load/store
//    unit to reach the banked L1 scratchpad;
//  * the wide bus (512-bit data, 48-bit address, valid/ready requests, in-order
//    responses that are always accepted) used by the DMA engine, the
//    instruction caches and the quadrant tree up to the L2 and HBM.
// The 512-bit width and the 128 KiB / 32-bank L1 follow the paper; the
// address map, the handshakes and the instruction subset are this design's
// own choices.
package manticore_pkg;

  // ---------------- wide bus ----------------
  localparam int unsigned WIDE_AW = 48;
  localparam int unsigned WIDE_DW = 512;
  localparam int unsigned WIDE_SW = WIDE_DW / 8;

  typedef struct packed {
    logic [WIDE_AW-1:0] addr;   // byte address, 64-byte aligned
    logic               we;     // 1: write, 0: read
    logic               instr;  // read is an instruction refill
    logic [WIDE_DW-1:0] wdata;
    logic [WIDE_SW-1:0] strb;
  } wide_req_t;

  typedef struct packed {
    logic [WIDE_DW-1:0] rdata;  // read data (undefined for write responses)
  } wide_rsp_t;

  // ---------------- narrow TCDM bus ----------------
  localparam int unsigned TCDM_DW = 64;

  typedef struct packed {
    logic [31:0]        addr;   // byte address
    logic               we;
    logic [TCDM_DW-1:0] wdata;
    logic [TCDM_DW/8-1:0] strb;
  } tcdm_req_t;

  // ---------------- core to FP subsystem offload ----------------
  typedef struct packed {
    logic [31:0] instr;  // the FP (or frep) instruction word
    logic [31:0] op;     // rs1 value (frep: repetitions), or address (fld/fsd)
  } offload_t;

  // ---------------- FPU operations ----------------
  typedef enum logic [2:0] {
    FOP_FMADD = 3'd0,   // a*b + c
    FOP_ADD   = 3'd1,   // a + c   (b ignored)
    FOP_MUL   = 3'd2,   // a * b
    FOP_SGNJ  = 3'd3,   // |a| with sign of b (fmv.d when a == b)
    FOP_SGNJN = 3'd4,
    FOP_SGNJX = 3'd5
  } fpu_op_e;

  // ---------------- RISC-V opcodes used ----------------
  localparam logic [6:0] OPC_LOAD_FP  = 7'b0000111;
  localparam logic [6:0] OPC_STORE_FP = 7'b0100111;
  localparam logic [6:0] OPC_FMADD    = 7'b1000011;
  localparam logic [6:0] OPC_OP_FP    = 7'b1010011;
  localparam logic [6:0] OPC_FREP     = 7'b0001011;  // custom-0

  // ---------------- address map ----------------
  localparam logic [31:0] TCDM_BASE   = 32'h1000_0000;  // 128 KiB L1
  localparam logic [31:0] SSR_BASE    = 32'h1002_0000;  // core-private SSR registers
  localparam logic [31:0] PERIPH_BASE = 32'h1003_0000;  // cluster peripherals (DMA)
  localparam logic [31:0] L2_BASE     = 32'h8000_0000;  // chiplet L2 (32 MiB window)
  localparam logic [31:0] BOOT_ADDR   = 32'h8000_0000;

  // SSR register offsets (per stream s at SSR_BASE + s*0x100)
  //  0x00+4d bound_d (iterations - 1), 0x20+4d stride_d (bytes),
  //  0x40 dims (number of dims - 1), 0x60 read base (starts read stream),
  //  0x64 write base (starts write stream), 0x70 status (bit0: done)
  // SSR_BASE + 0x7C0: stream enable (bit 0); reachable with a 12-bit store offset
  localparam logic [11:0] SSR_ENABLE_OFS = 12'h7C0;

  // DMA register offsets (PERIPH_BASE +)
  //  0x00 src lo, 0x04 src hi, 0x08 dst lo, 0x0C dst hi, 0x10 length in bytes,
  //  0x14 start (write), 0x18 busy (read), 0x1C completed transfers (read)

endpackage
