// tb_weight_buffer: writes random weights into every slot, reads them back in random order and
// checks the registered read data against a copy kept in the testbench.
module tb_weight_buffer;
  localparam int D = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we; logic [5:0] waddr, raddr; logic [7:0] wdata, rdata;
  logic [7:0] ref_m [D];

  weight_buffer #(.DEPTH(D)) dut (.*);

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int i = 0; i < D; i++) begin
      @(negedge clk); we = 1; waddr = 6'(i); wdata = 8'($urandom); ref_m[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 300; k++) begin
      @(negedge clk);
      raddr = 6'($urandom);
      // a write to another slot in the same cycle must not disturb the read
      we = 1; waddr = raddr + 6'd1; wdata = 8'($urandom);
      @(posedge clk); #1;
      checks++;
      if (rdata !== ref_m[raddr]) begin failures++; $display("slot %0d got %h exp %h", raddr, rdata, ref_m[raddr]); end
      ref_m[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
