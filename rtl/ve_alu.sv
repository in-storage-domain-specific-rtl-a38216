// ve_alu: integer arithmetic/logic unit of a vector engine (VE).
//
// Purely combinational, 32-bit signed two's complement: add, subtract, multiply (low 32 bits),
// max, min, arithmetic shift right and shift left by imm[4:0], add immediate (sign-extended
// 16-bit imm) and move. The published VE contains an ALU for element-wise vector arithmetic;
// the operation list and the encoding are this design's choices.
module ve_alu
  import dscs_pkg::*;
(
  input  vop_e        op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  logic [15:0] imm,
  output logic [31:0] y
);
  logic signed [31:0] sa, sb;
  assign sa = a;
  assign sb = b;
  always_comb begin
    unique case (op)
      V_ADD:   y = a + b;
      V_SUB:   y = a - b;
      V_MUL:   y = a * b;
      V_MAX:   y = (sa > sb) ? a : b;
      V_MIN:   y = (sa < sb) ? a : b;
      V_SRA:   y = sa >>> imm[4:0];
      V_SLL:   y = a << imm[4:0];
      V_ADDI:  y = a + {{16{imm[15]}}, imm};
      default: y = a;   // V_MOV
    endcase
  end
endmodule
