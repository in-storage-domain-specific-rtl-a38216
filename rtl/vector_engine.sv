// vector_engine: one SIMD lane (VE) of the Vector Processing Unit.
//
// The lane holds the functional units of the published VE: MAC, ALU, floating-point unit,
// non-linear unit and data-typecast unit. A multiplexer picks the unit that serves the current
// opcode and its result is captured in the output register. The transpose unit's operand comes
// in on `a` already rotated across lanes by the VPU (see vpu), and the load/store unit's
// address generation lives in the VPU sequencer, so in this lane both reduce to a move.
// Timing: operands and opcode in cycle k, y/y_vld valid from cycle k+1 (one register stage).
module vector_engine
  import dscs_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  vop_e        op,
  input  logic        first,   // first element of an instruction (clears the MAC)
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  logic [15:0] imm,
  output logic [31:0] y,
  output logic        y_vld
);
  logic [31:0] y_alu, y_mac, y_nl, y_fp, y_tc, y_mux;

  ve_alu       u_alu (.op(op), .a(a), .b(b), .imm(imm), .y(y_alu));
  ve_mac       u_mac (.clk(clk), .rst_n(rst_n), .en(en && op == V_MACC), .first(first),
                      .a(a), .b(b), .y(y_mac));
  ve_nonlinear u_nl  (.op(op), .a(a), .imm(imm), .y(y_nl));
  ve_fpu       u_fp  (.op(op), .a(a), .b(b), .y(y_fp));
  ve_typecast  u_tc  (.op(op), .a(a), .imm(imm), .y(y_tc));

  always_comb begin
    unique case (op)
      V_MACC:                                  y_mux = y_mac;
      V_RELU, V_LRELU, V_SIGM, V_TANH, V_GELU: y_mux = y_nl;
      V_FADD, V_FMUL:                          y_mux = y_fp;
      V_I2F, V_F2I, V_F2H, V_H2F, V_REQ8:      y_mux = y_tc;
      V_TRN:                                   y_mux = a;
      default:                                 y_mux = y_alu;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y     <= '0;
      y_vld <= 1'b0;
    end else begin
      y_vld <= en;
      if (en) y <= y_mux;
    end
  end
endmodule
