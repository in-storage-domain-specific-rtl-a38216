// tb_pe: self-checking test of one processing element.
// Drives random signed activations, weights and incoming partial sums and checks, each cycle,
// that the activation is forwarded after one cycle and that the output partial sum equals
// psum_in + (previous activation) * weight, computed here independently.
module tb_pe;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic signed [7:0]  act_in, w, act_out;
  logic signed [31:0] psum_in, psum_out;
  logic act_vld_in, act_vld_out, psum_vld_out;

  pe dut (.*);

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [7:0] a_prev;
    logic v_prev, v_prev2;
    logic signed [31:0] exp_ps;
    act_in = 0; w = 0; psum_in = 0; act_vld_in = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    a_prev = 0; v_prev = 0; v_prev2 = 0;
    for (int k = 0; k < 1000; k++) begin
      @(negedge clk);
      act_in = 8'($urandom); w = 8'($urandom); psum_in = $urandom; act_vld_in = 1'($urandom);
      if (k % 7 == 0) begin act_in = -128; w = -128; end   // extreme product
      exp_ps = psum_in + a_prev * w;
      @(posedge clk); #1;
      checks++;
      if (act_out !== act_in || act_vld_out !== act_vld_in) begin
        failures++; $display("act fwd mismatch k=%0d", k);
      end
      checks++;
      if (psum_out !== exp_ps || psum_vld_out !== v_prev) begin
        failures++; $display("psum mismatch k=%0d got %0d exp %0d", k, psum_out, exp_ps);
      end
      a_prev = act_in; v_prev = act_vld_in;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
