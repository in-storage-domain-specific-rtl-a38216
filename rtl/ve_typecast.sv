// ve_typecast: data-type conversion unit of a vector engine.
//
// Combinational conversions between the formats the accelerator handles:
//   V_I2F   int32 -> fp32        (truncated)
//   V_F2I   fp32  -> int32       (toward zero, saturating)
//   V_F2H   fp32  -> fp16        (low 16 bits; subnormals flushed, overflow to infinity)
//   V_H2F   fp16  -> fp32        (input in the low 16 bits)
//   V_REQ8  int32 -> int8        (arithmetic shift right by imm, saturate to -128..127,
//                                 sign-extended; requantises accumulator results for the MPU)
// The published VE has a data-typecast unit (the text names fp32-to-fp16 as an example);
// the list of conversions and their rounding are this design's choice.
module ve_typecast
  import dscs_pkg::*;
(
  input  vop_e        op,
  input  logic [31:0] a,
  input  logic [15:0] imm,
  output logic [31:0] y
);
  function automatic logic [31:0] i2f(input logic [31:0] v);
    logic [31:0] mag;
    int          p;
    logic [31:0] sh;
    if (v == 0) return 32'd0;
    mag = v[31] ? -v : v;     // 0x80000000 stays as its own magnitude
    p = 0;
    for (int i = 0; i < 32; i++) if (mag[i]) p = i;
    sh = mag << (31 - p);
    return {v[31], 8'(127 + p), sh[30:8]};
  endfunction

  function automatic logic [31:0] f2i(input logic [31:0] f);
    int          sh;
    logic [31:0] m;
    if (f[30:23] < 127) return 32'd0;
    sh = int'(f[30:23]) - 127;
    if (sh >= 31) return f[31] ? 32'h8000_0000 : 32'h7FFF_FFFF;
    m = {8'd0, 1'b1, f[22:0]};
    m = (sh >= 23) ? (m << (sh - 23)) : (m >> (23 - sh));
    return f[31] ? -m : m;
  endfunction

  function automatic logic [15:0] f2h(input logic [31:0] f);
    int e;
    e = int'(f[30:23]) - 127 + 15;
    if (f[30:23] == 0 || e <= 0) return {f[31], 15'd0};
    if (e >= 31)                 return {f[31], 5'h1F, 10'd0};
    return {f[31], 5'(e), f[22:13]};
  endfunction

  function automatic logic [31:0] h2f(input logic [15:0] h);
    if (h[14:10] == 0)  return {h[15], 31'd0};
    if (h[14:10] == 31) return {h[15], 8'hFF, h[9:0], 13'd0};
    return {h[15], 8'(32'(h[14:10]) - 15 + 127), h[9:0], 13'd0};
  endfunction

  logic signed [31:0] q;
  assign q = $signed(a) >>> imm[4:0];

  always_comb begin
    unique case (op)
      V_I2F:   y = i2f(a);
      V_F2I:   y = f2i(a);
      V_F2H:   y = {16'd0, f2h(a)};
      V_H2F:   y = h2f(a[15:0]);
      default: y = (q > 127) ? 32'd127 : (q < -128) ? 32'hFFFF_FF80 : q;  // V_REQ8
    endcase
  end
endmodule
