// tb_vector_engine: exercises every functional unit of one vector-engine lane through the
// lane's multiplexer and output register. Integer, fixed-point and requantisation results are
// compared exactly with models written here; fp32 results are compared with double-precision
// arithmetic truncated to fp32, allowing the one-ulp difference between this design's truncation
// and round-to-nearest. MAC accumulation is checked over random sequences.
module tb_vector_engine;
  import dscs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en, first, y_vld; vop_e op; logic [31:0] a, b, y; logic [15:0] imm;

  vector_engine dut (.*);

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(vop_e o, logic [31:0] x, logic [31:0] z, logic [15:0] im, bit fst, output logic [31:0] r);
    @(negedge clk); en = 1; op = o; a = x; b = z; imm = im; first = fst;
    @(posedge clk); #1; r = y;
    checks++;
    if (!y_vld) begin failures++; $display("y_vld low"); end
    en = 0;
  endtask

  task automatic expect_eq(string what, logic [31:0] got, logic [31:0] exp_v);
    checks++;
    if (got !== exp_v) begin failures++; $display("%s: got %h exp %h", what, got, exp_v); end
  endtask

  task automatic expect_ulp(string what, logic [31:0] got, logic [31:0] exp_v);
    int d;
    d = int'(got) - int'(exp_v);
    checks++;
    if (got[31] != exp_v[31] || d > 1 || d < -1) begin failures++; $display("%s: got %h exp %h", what, got, exp_v); end
  endtask

  // fp32 <-> real through the double-precision bit pattern (truncating)
  function automatic real f2r(input logic [31:0] f);
    if (f[30:23] == 0) return 0.0;
    return $bitstoreal({f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0});
  endfunction
  function automatic logic [31:0] r2f(input real v);
    logic [63:0] d;
    if (v == 0.0) return 32'd0;
    d = $realtobits(v);
    return {d[63], 8'(int'(d[62:52]) - 1023 + 127), d[51:29]};
  endfunction
  function automatic logic [31:0] rnd_float();
    return r2f(real'($urandom_range(0, 2000000) - 1000000) / real'($urandom_range(1, 1000)));
  endfunction

  function automatic int clampi(int v, int lo, int hi);
    return v < lo ? lo : v > hi ? hi : v;
  endfunction

  initial begin
    logic [31:0] r, x, z;
    int sx, sz, acc;
    en = 0; first = 0; op = V_MOV; a = 0; b = 0; imm = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 200; k++) begin
      x = $urandom; z = $urandom; sx = x; sz = z;
      if (k % 4 == 0) begin x = $urandom_range(0, 4000) - 2000; z = $urandom_range(0, 4000) - 2000; sx = x; sz = z; end
      // ALU
      run(V_ADD, x, z, 0, 0, r);  expect_eq("add", r, 32'(sx + sz));
      run(V_SUB, x, z, 0, 0, r);  expect_eq("sub", r, 32'(sx - sz));
      run(V_MUL, x, z, 0, 0, r);  expect_eq("mul", r, 32'(sx * sz));
      run(V_MAX, x, z, 0, 0, r);  expect_eq("max", r, 32'((sx > sz) ? sx : sz));
      run(V_MIN, x, z, 0, 0, r);  expect_eq("min", r, 32'((sx < sz) ? sx : sz));
      run(V_SRA, x, z, 16'(k % 32), 0, r); expect_eq("sra", r, 32'(sx >>> (k % 32)));
      run(V_SLL, x, z, 16'(k % 32), 0, r); expect_eq("sll", r, x << (k % 32));
      run(V_ADDI, x, z, 16'hFF9C, 0, r);   expect_eq("addi", r, 32'(sx - 100));
      run(V_MOV, x, z, 0, 0, r);  expect_eq("mov", r, x);
      run(V_TRN, x, z, 0, 0, r);  expect_eq("trn", r, x);
      // non-linear, Q.8 fixed point, small values so the clamps are both hit and missed
      sx = $urandom_range(0, 2048) - 1024; x = sx;
      run(V_RELU, x, 0, 0, 0, r);  expect_eq("relu", r, 32'(sx < 0 ? 0 : sx));
      run(V_LRELU, x, 0, 3, 0, r); expect_eq("lrelu", r, 32'(sx < 0 ? int'($floor(real'(sx) / 8.0)) : sx));
      run(V_SIGM, x, 0, 0, 0, r);  expect_eq("sigm", r, 32'(clampi(int'($floor(real'(sx) / 4.0)) + 128, 0, 256)));
      run(V_TANH, x, 0, 0, 0, r);  expect_eq("tanh", r, 32'(clampi(sx, -256, 256)));
      begin
        int zz, hs;
        zz = int'($floor(real'(sx) * 436.0 / 256.0));
        hs = clampi(int'($floor(real'(zz) / 4.0)) + 128, 0, 256);
        run(V_GELU, x, 0, 0, 0, r); expect_eq("gelu", r, 32'(int'($floor(real'(sx) * real'(hs) / 256.0))));
      end
      // requantise
      sx = $urandom_range(0, 200000) - 100000; x = sx;
      run(V_REQ8, x, 0, 16'(k % 10), 0, r);
      expect_eq("req8", r, 32'(clampi(int'($floor(real'(sx) / real'(1 << (k % 10)))), -128, 127)));
      // fp32
      x = rnd_float(); z = rnd_float();
      run(V_FADD, x, z, 0, 0, r); expect_ulp("fadd", r, r2f(f2r(x) + f2r(z)));
      run(V_FMUL, x, z, 0, 0, r); expect_ulp("fmul", r, r2f(f2r(x) * f2r(z)));
      sx = $urandom; x = sx;
      run(V_I2F, x, 0, 0, 0, r);  expect_ulp("i2f", r, r2f(real'(sx)));
      x = rnd_float();
      run(V_F2I, x, 0, 0, 0, r);  expect_eq("f2i", r, 32'($rtoi(f2r(x))));
      run(V_F2H, x, 0, 0, 0, r);  z = r;
      run(V_H2F, z, 0, 0, 0, r);
      if (x[30:23] >= 113 && x[30:23] <= 141) expect_eq("f2h/h2f", r, {x[31:13], 13'd0});
    end
    // fp16 constants
    run(V_F2H, 32'h3F80_0000, 0, 0, 0, r); expect_eq("f2h 1.0", r, 32'h3C00);
    run(V_F2H, 32'hC020_0000, 0, 0, 0, r); expect_eq("f2h -2.5", r, 32'hC100);
    run(V_F2H, 32'h477F_E000, 0, 0, 0, r); expect_eq("f2h 65504", r, 32'h7BFF);
    run(V_F2H, 32'h4780_0000, 0, 0, 0, r); expect_eq("f2h 65536", r, 32'h7C00);
    // MAC sequences
    for (int s = 0; s < 20; s++) begin
      acc = 0;
      for (int i = 0; i < 10; i++) begin
        sx = $urandom_range(0, 2000) - 1000; sz = $urandom_range(0, 2000) - 1000;
        acc = (i == 0 ? 0 : acc) + sx * sz;
        run(V_MACC, 32'(sx), 32'(sz), 0, i == 0, r);
        expect_eq("macc", r, 32'(acc));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
