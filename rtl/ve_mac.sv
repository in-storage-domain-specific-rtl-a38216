// ve_mac: multiply-accumulate unit of a vector engine.
//
// acc <= (first ? 0 : acc) + a*b on every enabled cycle; y is the value the accumulator takes,
// so a MACC instruction whose destination does not advance leaves the full dot product (or,
// with b = 1, the sum used for mean and normalisation reductions) in its destination. 32-bit
// signed, wrap-around. The VE's MAC unit is in the published design; the accumulator
// behaviour is this design's choice. One cycle to update, result visible combinationally.
module ve_mac (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic        first,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic [31:0] acc;
  assign y = (first ? 32'd0 : acc) + a * b;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  acc <= '0;
    else if (en) acc <= y;
  end
endmodule
