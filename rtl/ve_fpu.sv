// ve_fpu: single-precision (IEEE-754 binary32) add and multiply for a vector engine.
//
// Combinational. Subnormal inputs and results are flushed to zero, results are truncated
// (round toward zero), exponent overflow gives infinity, and NaN/infinity inputs are not
// treated specially. The published VE has a floating-point unit; its precision and rounding
// are not given, so binary32 with these simplifications is this design's choice.
module ve_fpu
  import dscs_pkg::*;
(
  input  vop_e        op,     // V_FADD or V_FMUL
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  // ---------------------------------------------------------------- multiply
  function automatic logic [31:0] fmul(input logic [31:0] x, input logic [31:0] z);
    logic        s;
    logic [47:0] p;
    logic signed [10:0] e;
    logic [22:0] m;
    s = x[31] ^ z[31];
    if (x[30:23] == 0 || z[30:23] == 0) return {s, 31'd0};
    p = {1'b1, x[22:0]} * {1'b1, z[22:0]};
    e = 11'(x[30:23]) + 11'(z[30:23]) - 11'sd127;
    if (p[47]) begin m = p[46:24]; e = e + 1; end
    else             m = p[45:23];
    if (e <= 0)   return {s, 31'd0};
    if (e >= 255) return {s, 8'hFF, 23'd0};
    return {s, e[7:0], m};
  endfunction

  // ---------------------------------------------------------------- add
  function automatic logic [31:0] fadd(input logic [31:0] x, input logic [31:0] z);
    logic [31:0] big, sml;
    logic [26:0] mb, ms, r;       // 1 hidden + 23 + 3 guard bits
    logic [27:0] sum;
    logic [7:0]  d;
    logic signed [10:0] e;
    int          lz;
    if (x[30:23] == 0) return (z[30:23] == 0) ? 32'd0 : z;
    if (z[30:23] == 0) return x;
    if (x[30:0] >= z[30:0]) begin big = x; sml = z; end
    else                    begin big = z; sml = x; end
    d  = big[30:23] - sml[30:23];
    mb = {1'b1, big[22:0], 3'b000};
    ms = (d > 26) ? 27'd0 : ({1'b1, sml[22:0], 3'b000} >> d);
    e  = 11'(big[30:23]);
    if (big[31] == sml[31]) begin
      sum = {1'b0, mb} + {1'b0, ms};
      if (sum[27]) begin r = sum[27:1]; e = e + 1; end
      else           r = sum[26:0];
    end else begin
      r = mb - ms;
      if (r == 0) return 32'd0;
      lz = 0;
      for (int i = 26; i >= 0; i--) begin
        if (r[i]) break;
        lz++;
      end
      r = r << lz;
      e = e - 11'(lz);
    end
    if (e <= 0)   return 32'd0;
    if (e >= 255) return {big[31], 8'hFF, 23'd0};
    return {big[31], e[7:0], r[25:3]};
  endfunction

  assign y = (op == V_FMUL) ? fmul(a, b) : fadd(a, b);
endmodule
