// dsa_controller: instruction sequencer of the accelerator.
//
// Runs a compiled program from a local instruction memory, written by the host through the
// register block. Each 128-bit instruction (dscs_pkg::instr_t) either starts a DMA transfer, a
// GEMM tile on the MPU, a vector instruction on the VPU, waits for units to go idle, or ends
// the program. A unit command issues as soon as that unit is idle, so a DMA that fetches the
// next tile runs while the MPU computes the current one (the compiler places OP_WAIT where
// data must have arrived). A vector instruction also waits for the MPU, because it reads the
// output buffer the MPU writes. OP_END waits for all units, pulses `done` (which the register
// block turns into the interrupt to the host) and returns to idle. The published design
// compiles each model to the accelerator's own ISA and overlaps tile transfers with
// computation; the encoding and the issue rules here are this design's choices.
// One instruction is examined per cycle; `cycles` holds the length of the last run.
module dsa_controller
  import dscs_pkg::*;
#(
  parameter int unsigned IMEM_DEPTH = dscs_pkg::DEF_IMEM_DEPTH,
  localparam int unsigned PW        = $clog2(IMEM_DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  // program load and start
  input  logic          imem_we,
  input  logic [PW-1:0] imem_waddr,
  input  instr_t        imem_wdata,
  input  logic          start,
  input  logic [PW-1:0] start_pc,
  output logic          busy,
  output logic          done,
  output logic [31:0]   cycles,
  // DMA
  output logic          dma_valid,
  input  logic          dma_ready,
  output logic [31:0]   dma_src,
  output logic [31:0]   dma_dst,
  output logic [15:0]   dma_len,
  input  logic          dma_busy,
  // MPU (and output buffer)
  output logic          mpu_start,
  output logic [31:0]   mpu_ibuf_base,
  output logic [31:0]   mpu_obuf_base,
  output logic [15:0]   mpu_nvec,
  output logic [15:0]   mpu_slot,
  output logic          mpu_acc,
  input  logic          mpu_busy,
  // VPU
  output logic          vpu_start,
  output vop_e          vpu_op,
  output logic [15:0]   vpu_a,
  output logic [15:0]   vpu_b,
  output logic [15:0]   vpu_d,
  output logic [15:0]   vpu_len,
  output logic [15:0]   vpu_imm,
  output logic [5:0]    vpu_flags,
  input  logic          vpu_busy
);
  instr_t        imem [IMEM_DEPTH];
  logic [PW-1:0] pc;
  instr_t        ins;
  logic          run;
  logic          adv;

  always_ff @(posedge clk) if (imem_we) imem[imem_waddr] <= imem_wdata;
  assign ins = imem[pc];

  // unit interfaces take their fields straight from the current instruction
  assign dma_src       = ins.a;
  assign dma_dst       = ins.b;
  assign dma_len       = ins.c;
  assign mpu_ibuf_base = ins.a;
  assign mpu_obuf_base = ins.b;
  assign mpu_nvec      = ins.c;
  assign mpu_slot      = ins.d;
  assign mpu_acc       = ins.flags[0];
  assign vpu_op        = vop_e'(ins.sub);
  assign vpu_a         = ins.a[15:0];
  assign vpu_b         = ins.b[15:0];
  assign vpu_d         = ins.d;
  assign vpu_len       = ins.c;
  assign vpu_imm       = ins.imm;
  assign vpu_flags     = ins.flags;

  logic all_idle, wait_ok;
  assign all_idle = !dma_busy && !mpu_busy && !vpu_busy;
  assign wait_ok  = !(ins.flags[0] && dma_busy) && !(ins.flags[1] && mpu_busy) &&
                    !(ins.flags[2] && vpu_busy);

  assign dma_valid = run && ins.op == OP_DMA && !dma_busy;
  assign mpu_start = run && ins.op == OP_GEMM && !mpu_busy;
  assign vpu_start = run && ins.op == OP_VEC && !vpu_busy && !mpu_busy;

  always_comb begin
    adv = 1'b0;
    if (run) begin
      unique case (ins.op)
        OP_DMA:  adv = dma_valid && dma_ready;
        OP_GEMM: adv = mpu_start;
        OP_VEC:  adv = vpu_start;
        OP_WAIT: adv = wait_ok;
        OP_END:  adv = 1'b0;
        default: adv = 1'b1;      // OP_NOP and unknown opcodes
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; pc <= '0; done <= 1'b0; cycles <= '0;
    end else begin
      done <= 1'b0;
      if (!run) begin
        if (start) begin
          run <= 1'b1; pc <= start_pc; cycles <= '0;
        end
      end else begin
        cycles <= cycles + 1'b1;
        if (adv) pc <= pc + 1'b1;
        if (ins.op == OP_END && all_idle) begin
          run  <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
  assign busy = run;
endmodule
