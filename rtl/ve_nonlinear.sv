// ve_nonlinear: activation-function unit of a vector engine.
//
// Works on signed 32-bit fixed point with FRAC fraction bits (1.0 = 2**FRAC). ReLU is exact.
// The other functions use piecewise-linear forms that need only shifts, adds and one multiply:
//   LeakyReLU  x >= 0 ? x : x >>> imm          (negative slope 2**-imm)
//   Sigmoid    clamp(x/4 + 1/2, 0, 1)          (hard sigmoid)
//   Tanh       clamp(x, -1, 1)                 (hard tanh)
//   GeLU       x * hsig(1.703 x)               (1.703 ~ 436/256)
// The published VE has a non-linear unit for ReLU, LeakyReLU, Tanh, Sigmoid and GeLU; it does
// not say how they are evaluated, so the approximations here are this design's choice.
module ve_nonlinear
  import dscs_pkg::*;
(
  input  vop_e        op,
  input  logic [31:0] a,
  input  logic [15:0] imm,
  output logic [31:0] y
);
  localparam logic signed [31:0] ONE  = 32'sd1 <<< FRAC;
  localparam logic signed [31:0] HALF = 32'sd1 <<< (FRAC - 1);

  function automatic logic signed [31:0] clamp(input logic signed [31:0] v,
                                               input logic signed [31:0] lo,
                                               input logic signed [31:0] hi);
    return (v < lo) ? lo : (v > hi) ? hi : v;
  endfunction

  logic signed [31:0] x, hs, z;
  logic signed [63:0] prod;
  assign x    = a;
  assign z    = 32'((64'(x) * 64'sd436) >>> 8);
  assign hs   = clamp((z >>> 2) + HALF, 0, ONE);
  assign prod = 64'(x) * 64'(hs);

  always_comb begin
    unique case (op)
      V_RELU:  y = (x < 0) ? 32'd0 : a;
      V_LRELU: y = (x < 0) ? 32'(x >>> imm[4:0]) : a;
      V_SIGM:  y = clamp((x >>> 2) + HALF, 0, ONE);
      V_TANH:  y = clamp(x, -ONE, ONE);
      default: y = 32'(prod >>> FRAC);   // V_GELU
    endcase
  end
endmodule
