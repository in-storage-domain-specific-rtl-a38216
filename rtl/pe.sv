// pe: one processing element of the systolic Matrix Processing Unit.
//
// The incoming 8-bit activation is captured in the activation register and forwarded to the
// PE on the right on the next cycle. The registered activation is multiplied by the 8-bit
// weight presented by this PE's weight buffer and added to the 32-bit partial sum arriving from
// the PE above; the sum is captured in the output register and passed down. Widths (8-bit
// activation and weight, 32-bit partial sum), the Act Reg / Out Reg placement and the
// multiply-then-add structure are those of the published PE; signed two's-complement
// operands and the valid bits that travel with the data are this design's choices.
//
// Timing: act_out/act_vld_out follow act_in by one cycle; psum_out is
// psum_in(t) + act_out(t) * w(t), registered, so a value entering at the left of row r, column c
// at cycle t contributes to psum_out of that PE at cycle t+2.
module pe (
  input  logic               clk,
  input  logic               rst_n,
  input  logic signed [7:0]  act_in,
  input  logic               act_vld_in,
  input  logic signed [7:0]  w,
  input  logic signed [31:0] psum_in,
  output logic signed [7:0]  act_out,
  output logic               act_vld_out,
  output logic signed [31:0] psum_out,
  output logic               psum_vld_out
);
  logic signed [15:0] prod;
  assign prod = act_out * w;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_out      <= '0;
      act_vld_out  <= 1'b0;
      psum_out     <= '0;
      psum_vld_out <= 1'b0;
    end else begin
      act_out      <= act_in;
      act_vld_out  <= act_vld_in;
      psum_out     <= psum_in + 32'(prod);
      psum_vld_out <= act_vld_out;
    end
  end
endmodule
