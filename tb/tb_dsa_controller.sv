// tb_dsa_controller: runs a small program against unit models with fixed busy times and checks
// the issue order and fields, that a GEMM issues while the DMA before it is still running
// (transfer/compute overlap), that a vector instruction waits for the MPU, that OP_WAIT holds
// until the DMA is idle, and that OP_END waits for all units before pulsing done.
module tb_dsa_controller;
  import dscs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic imem_we, start, busy, done, dma_valid, dma_ready, dma_busy, mpu_start, mpu_acc, mpu_busy, vpu_start, vpu_busy;
  logic [7:0] imem_waddr, start_pc; instr_t imem_wdata; logic [31:0] cycles;
  logic [31:0] dma_src, dma_dst, mpu_ibuf_base, mpu_obuf_base; logic [15:0] dma_len, mpu_nvec, mpu_slot;
  vop_e vpu_op; logic [15:0] vpu_a, vpu_b, vpu_d, vpu_len, vpu_imm; logic [5:0] vpu_flags;

  dsa_controller dut (.*);

  // unit models
  int dma_left = 0, mpu_left = 0, vpu_left = 0;
  assign dma_busy = dma_left != 0;
  assign mpu_busy = mpu_left != 0;
  assign vpu_busy = vpu_left != 0;
  assign dma_ready = !dma_busy;
  string log_q [$];
  int t = 0;
  int t_dma0 = -1, t_gemm = -1, t_vec = -1, t_wait_pass = -1, t_done = -1, t_dma_idle = -1, t_mpu_idle = -1;
  always @(posedge clk) begin
    t++;
    // unit state changes with nonblocking assignments, so the controller sees it after this edge
    dma_left <= (dma_valid && dma_ready) ? int'(dma_len) : (dma_left != 0) ? dma_left - 1 : 0;
    mpu_left <= mpu_start ? 30 : (mpu_left != 0) ? mpu_left - 1 : 0;
    vpu_left <= vpu_start ? int'(vpu_len) + 2 : (vpu_left != 0) ? vpu_left - 1 : 0;
    if (dma_left == 1) t_dma_idle = t;
    if (mpu_left == 1) t_mpu_idle = t;
    if (dma_valid && dma_ready) begin log_q.push_back($sformatf("DMA %0h %0h %0d", dma_src, dma_dst, dma_len)); if (t_dma0 < 0) t_dma0 = t; end
    if (mpu_start) begin t_gemm = t; log_q.push_back($sformatf("GEMM %0d %0d %0d %0d %0d", mpu_ibuf_base, mpu_obuf_base, mpu_nvec, mpu_slot, mpu_acc)); end
    if (vpu_start) begin t_vec = t; log_q.push_back($sformatf("VEC %0d %0d %0d %0d %0d %0d %0d", vpu_op, vpu_a, vpu_b, vpu_d, vpu_len, vpu_imm, vpu_flags)); end
    if (done && rst_n) t_done = t;
  end

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic put(int idx, instr_t ins);
    @(negedge clk); imem_we = 1; imem_waddr = 8'(idx); imem_wdata = ins;
  endtask

  function automatic instr_t mk(opcode_e op, int sub, int a, int b, int c, int d, int imm, int fl);
    instr_t i;
    i.op = op; i.sub = 6'(sub); i.a = a; i.b = b; i.c = 16'(c); i.d = 16'(d); i.imm = 16'(imm); i.flags = 6'(fl);
    return i;
  endfunction

  task automatic expect_log(int k, string s);
    checks++;
    if (k >= log_q.size() || log_q[k] != s) begin failures++; $display("issue %0d: got '%s' exp '%s'", k, k < log_q.size() ? log_q[k] : "none", s); end
  endtask

  initial begin
    imem_we = 0; imem_waddr = 0; imem_wdata = '0; start = 0; start_pc = 0;
    t_dma0 = -1; t_gemm = -1; t_vec = -1; t_done = -1; t_dma_idle = -1; t_mpu_idle = -1;
    dma_left = 0; mpu_left = 0; vpu_left = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    put(10, mk(OP_DMA, 0, 32'h1000_0000, 32'h3000_0000, 20, 0, 0, 0));
    put(11, mk(OP_WAIT, 0, 0, 0, 0, 0, 0, 1));
    put(12, mk(OP_DMA, 0, 32'h1000_0100, 32'h2000_0000, 40, 0, 0, 0));
    put(13, mk(OP_GEMM, 0, 0, 8, 16, 0, 0, 1));
    put(14, mk(OP_NOP, 0, 0, 0, 0, 0, 0, 0));
    put(15, mk(OP_VEC, V_RELU, 8, 0, 16, 100, 0, 11));
    put(16, mk(OP_END, 0, 0, 0, 0, 0, 0, 0));
    @(negedge clk); imem_we = 0; start = 1; start_pc = 8'd10;
    @(negedge clk); start = 0;
    wait (t_done >= 0);
    repeat (3) @(posedge clk);
    expect_log(0, "DMA 10000000 30000000 20");
    expect_log(1, "DMA 10000100 20000000 40");
    expect_log(2, "GEMM 0 8 16 0 1");
    expect_log(3, $sformatf("VEC %0d 8 0 100 16 0 11", V_RELU));
    checks++; if (log_q.size() != 4) begin failures++; $display("%0d issues", log_q.size()); end
    // the second DMA waited for the first (OP_WAIT)
    checks++; if (t_dma0 + 20 > t_gemm - 1) begin failures++; $display("WAIT did not hold"); end
    // GEMM issued while the second DMA was still running (overlap)
    checks++; if (!(t_gemm < t_dma_idle)) begin failures++; $display("no DMA/GEMM overlap: gemm %0d dma idle %0d", t_gemm, t_dma_idle); end
    // VEC waited for the MPU
    checks++; if (t_vec <= t_mpu_idle) begin failures++; $display("VEC before MPU idle"); end
    // END waited for everything
    checks++; if (t_done <= t_vec + 16 + 2) begin failures++; $display("done too early"); end
    checks++; if (busy) begin failures++; $display("still busy"); end
    checks++; if (int'(cycles) < t_done - t_dma0 - 2 || int'(cycles) > t_done - t_dma0 + 2) begin failures++; $display("cycles %0d, first DMA %0d, done %0d", cycles, t_dma0, t_done); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
