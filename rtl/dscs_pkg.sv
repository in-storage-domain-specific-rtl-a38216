// dscs_pkg: types and constants shared by the in-storage accelerator (DSA) and the
// drive-level blocks around it.
//
// The accelerator follows the organisation of a weight-stationary 128x128 int8 systolic
// Matrix Processing Unit (MPU) feeding a SIMD Vector Processing Unit (VPU) through a shared
// multi-bank output buffer, with 4 MB of on-chip buffering and a 1 GHz clock. The array size,
// the 8-bit activation/weight and 32-bit partial-sum widths and the 4 MB total come from the
// published design; the split of the 4 MB between buffers, the bus width, the address map and
// the instruction encoding below are this implementation's own choices.
package dscs_pkg;

  // ---------------------------------------------------------------- sizes (defaults)
  localparam int unsigned DEF_ROWS      = 128;   // PE rows (reduction dimension)
  localparam int unsigned DEF_COLS      = 128;   // PE columns = VPU lanes
  localparam int unsigned DEF_BUS_W     = 256;   // data-bus beat, 32 B (about DDR5 rate at 1 GHz)
  localparam int unsigned DEF_IB_DEPTH  = 8192;  // bytes per input-buffer bank    (1 MB total)
  localparam int unsigned DEF_WB_DEPTH  = 64;    // weights per PE weight buffer   (1 MB total)
  localparam int unsigned DEF_OB_DEPTH  = 2048;  // 32-bit words per output bank   (1 MB total)
  localparam int unsigned DEF_VM_DEPTH  = 2048;  // 32-bit words per VPU lane bank (1 MB total)
  localparam int unsigned DEF_IMEM_DEPTH = 256;  // 128-bit instructions

  // ---------------------------------------------------------------- address spaces
  // A 32-bit DMA address counts bus beats. Bits [31:28] select the space.
  typedef enum logic [3:0] {
    SP_FLASH = 4'd0,   // flash array, reached over the drive's P2P link
    SP_DRAM  = 4'd1,   // drive DRAM (staging buffer)
    SP_IBUF  = 4'd2,   // DSA input-activation buffer  (write only)
    SP_WBUF  = 4'd3,   // DSA per-PE weight buffers     (write only)
    SP_OBUF  = 4'd4,   // DSA output buffer             (read only)
    SP_VMEM  = 4'd5    // DSA VPU lane banks            (read/write)
  } space_e;

  // Which physical port of the DMA engine serves a space.
  typedef enum logic [1:0] {PORT_FLASH = 2'd0, PORT_DRAM = 2'd1, PORT_DSA = 2'd2} dma_port_e;

  function automatic dma_port_e port_of(input logic [3:0] sp);
    case (space_e'(sp))
      SP_FLASH: return PORT_FLASH;
      SP_DRAM:  return PORT_DRAM;
      default:  return PORT_DSA;
    endcase
  endfunction

  // Host address map: bit 31 set selects the DSA registers, otherwise the request is
  // ordinary storage traffic and goes to the flash side.
  localparam int unsigned HOST_DSA_BIT = 31;

  // ---------------------------------------------------------------- instructions
  typedef enum logic [3:0] {
    OP_NOP  = 4'd0,
    OP_DMA  = 4'd1,   // a = source, b = destination, c = beats
    OP_GEMM = 4'd2,   // a = ibuf byte base, b = obuf base, c = vectors, d = WB slot, flags[0] = accumulate
    OP_VEC  = 4'd3,   // sub = vop, a/b/d = addresses, c = elements, imm, flags = see VF_*
    OP_WAIT = 4'd4,   // flags[0] DMA, [1] MPU, [2] VPU: wait until the marked units are idle
    OP_END  = 4'd5    // wait for all units, then set done and raise the interrupt
  } opcode_e;

  typedef enum logic [5:0] {
    // ALU
    V_ADD, V_SUB, V_MUL, V_MAX, V_MIN, V_SRA, V_SLL, V_ADDI, V_MOV,
    // MAC
    V_MACC,
    // non-linear unit (fixed point, FRAC fraction bits)
    V_RELU, V_LRELU, V_SIGM, V_TANH, V_GELU,
    // floating-point unit (fp32)
    V_FADD, V_FMUL,
    // data typecast
    V_I2F, V_F2I, V_F2H, V_H2F, V_REQ8,
    // transpose through the lane rotation network
    V_TRN
  } vop_e;

  // OP_VEC flag bits
  localparam int unsigned VF_A_OBUF   = 0;  // operand a read from the output buffer (else lane bank)
  localparam int unsigned VF_A_STRIDE = 1;  // a address advances by one per element
  localparam int unsigned VF_B_STRIDE = 2;
  localparam int unsigned VF_D_STRIDE = 3;

  typedef struct packed {
    opcode_e     op;     // 4
    logic [5:0]  sub;    // 6
    logic [31:0] a;      // 32
    logic [31:0] b;      // 32
    logic [15:0] c;      // 16
    logic [15:0] d;      // 16
    logic [15:0] imm;    // 16
    logic [5:0]  flags;  // 6
  } instr_t;             // 128 bits

  // Fixed-point fraction bits used by the non-linear unit.
  localparam int unsigned FRAC = 8;

  // ---------------------------------------------------------------- register map (host view)
  localparam logic [11:0] CSR_CTRL    = 12'h000; // W: bit0 start, bit1 clear interrupt
  localparam logic [11:0] CSR_STATUS  = 12'h001; // R: bit0 busy, bit1 done, bit2 irq, bit3 DMA busy
  localparam logic [11:0] CSR_PC      = 12'h002; // RW: first instruction of the program
  localparam logic [11:0] CSR_DMA_SRC = 12'h003; // RW
  localparam logic [11:0] CSR_DMA_DST = 12'h004; // RW
  localparam logic [11:0] CSR_DMA_LEN = 12'h005; // W: writing the length starts the transfer
  localparam logic [11:0] CSR_CYCLES  = 12'h006; // R: cycles of the last program run
  // host address bit 12 set: instruction memory, word index in [11:0]

endpackage
