// tb_dscs_drive: end-to-end run of one serverless inference function on the drive, at reduced
// size (8 x 8 array, 128-bit bus, small buffers).
//
//   1. Input activations X (16 x 16, int8) and two weight tiles W (16 x 8 in all) sit in flash.
//   2. The host queues a flash-to-DRAM peer-to-peer transfer through the accelerator registers
//      and, while it runs, keeps reading other flash blocks (storage traffic bypassing the
//      accelerator), so the flash port is contended.
//   3. The host loads the accelerator program and starts it. The program loads W and X into the
//      weight and input buffers, runs two GEMM tiles whose partial sums accumulate in the output
//      buffer (K = 16 over an 8-row array), loads a spare weight tile while the MPU computes,
//      applies ReLU on the VPU straight from the output buffer, copies the raw sums to DRAM while
//      the VPU is reading the output buffer, copies the VPU result to DRAM and ends.
//   4. On the interrupt the host checks status and cycle count, clears the interrupt and queues
//      the DRAM-to-flash write-back, then reads both results back from flash and compares them
//      with a reference model.
// Each mechanism is counted; a mechanism that never happens counts as a failure.
module tb_dscs_drive;
  import dscs_pkg::*;
  localparam int R = 8, C = 8, BW = 128, IBD = 64, WBD = 4, OBD = 64, VMD = 64, IMD = 32;
  localparam int BB = BW / 8, LPB = BW / 32, VGRP = C / LPB, LINES = IBD / BB;
  localparam int T = 16, K = 16, LPT = T / BB;
  // DRAM / flash beat offsets
  localparam int X_OFF = 0, W_OFF = R * LINES, W2_OFF = W_OFF + 2 * R, IN_BEATS = W2_OFF + R;
  localparam int Y_OFF = 128, Z_OFF = Y_OFF + T * VGRP, OUT_BEATS = 2 * T * VGRP, WB_OFF = 256;
  localparam int OTHER = 400;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic host_req_valid, host_req_ready, host_req_we, host_rsp_valid, irq;
  logic [31:0] host_req_addr; logic [BW-1:0] host_req_wdata, host_rsp_rdata;
  logic flash_req_valid, flash_req_ready, flash_req_we, flash_rsp_valid;
  logic [31:0] flash_req_addr; logic [BW-1:0] flash_req_wdata, flash_rsp_rdata;
  logic dram_req_valid, dram_req_ready, dram_req_we, dram_rsp_valid;
  logic [31:0] dram_req_addr; logic [BW-1:0] dram_req_wdata, dram_rsp_rdata;
  logic [31:0] flash_conflicts, obuf_acc_count;
  logic dma_busy, mpu_busy, vpu_busy;

  dscs_drive #(.ROWS(R), .COLS(C), .BUS_W(BW), .IB_DEPTH(IBD), .WB_DEPTH(WBD), .OB_DEPTH(OBD),
               .VM_DEPTH(VMD), .IMEM_DEPTH(IMD)) dut (.*);

  mem_model #(.BUS_W(BW), .DEPTH(512), .LAT(6), .STALL(15)) u_flash (.clk, .req_valid(flash_req_valid),
    .req_ready(flash_req_ready), .req_we(flash_req_we), .req_addr(flash_req_addr), .req_wdata(flash_req_wdata),
    .rsp_valid(flash_rsp_valid), .rsp_rdata(flash_rsp_rdata));
  mem_model #(.BUS_W(BW), .DEPTH(512), .LAT(3), .STALL(10)) u_dram (.clk, .req_valid(dram_req_valid),
    .req_ready(dram_req_ready), .req_we(dram_req_we), .req_addr(dram_req_addr), .req_wdata(dram_req_wdata),
    .rsp_valid(dram_rsp_valid), .rsp_rdata(dram_rsp_rdata));

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int n_overlap = 0, n_buf_stall = 0, n_dram_stall = 0, n_irq = 0, n_gemm = 0, n_vec = 0, n_bypass = 0;
  logic mpu_busy_q;
  always @(posedge clk) if (rst_n) begin
    if (dma_busy && mpu_busy) n_overlap++;
    if (dut.u_dsa.buf_req_valid && !dut.u_dsa.buf_req_ready) n_buf_stall++;
    if (dram_req_valid && !dram_req_ready) n_dram_stall++;
    if (mpu_busy && !mpu_busy_q) n_gemm++;
    if (dut.u_dsa.vpu_start) n_vec++;
    mpu_busy_q <= mpu_busy;
  end
  logic irq_q;
  always @(posedge clk) begin irq_q <= irq; if (rst_n && irq && !irq_q) n_irq++; end

  // ---------------- host bus tasks ----------------
  task automatic hreq(logic we, logic [31:0] a, logic [BW-1:0] d);
    @(negedge clk); host_req_valid = 1; host_req_we = we; host_req_addr = a; host_req_wdata = d;
    #1;
    while (!host_req_ready) begin @(negedge clk); #1; end
    @(negedge clk); host_req_valid = 0; host_req_we = 0;
  endtask
  task automatic hwr(logic [31:0] a, logic [BW-1:0] d); hreq(1, a, d); endtask
  task automatic hrd(logic [31:0] a, output logic [BW-1:0] d);
    hreq(0, a, '0);
    // response may already be on the bus in the cycle the request is released
    if (!host_rsp_valid) while (!host_rsp_valid) @(negedge clk);
    d = host_rsp_rdata;
  endtask
  task automatic csr_wr(int off, logic [BW-1:0] d); hwr(32'h8000_0000 | 32'(off), d); endtask
  task automatic csr_rd(int off, output logic [BW-1:0] d); hrd(32'h8000_0000 | 32'(off), d); endtask
  task automatic put(int idx, instr_t ins);
    hwr(32'h8000_1000 | 32'(idx), BW'(ins));
  endtask

  function automatic instr_t mk(opcode_e op, int sub, int a, int b, int c, int d, int imm, int fl);
    instr_t i;
    i.op = op; i.sub = 6'(sub); i.a = a; i.b = b; i.c = 16'(c); i.d = 16'(d); i.imm = 16'(imm); i.flags = 6'(fl);
    return i;
  endfunction

  task automatic expect_eq(string w, longint g, longint e);
    checks++;
    if (g != e) begin failures++; $display("%s: got %0d expected %0d", w, g, e); end
  endtask

  // weight-buffer slot 2 of every PE, for checking the tile loaded during computation
  logic signed [7:0] spare [R][C];
  for (genvar r = 0; r < R; r++) begin : g_sr
    for (genvar c = 0; c < C; c++) begin : g_sc
      assign spare[r][c] = dut.u_dsa.u_mpu.g_row[r].g_col[c].u_wb.mem[2];
    end
  end

  // ---------------- data and reference ----------------
  logic signed [7:0] X [T][K];
  logic signed [7:0] W [K + R][C];
  int y_ref [T][C];

  initial begin
    logic [BW-1:0] d, beat;
    instr_t prog [$];
    int t_start;
    host_req_valid = 0; host_req_we = 0; host_req_addr = 0; host_req_wdata = 0;
    n_overlap = 0; n_buf_stall = 0; n_dram_stall = 0; n_irq = 0; n_gemm = 0; n_vec = 0; n_bypass = 0;
    for (int t = 0; t < T; t++) for (int k = 0; k < K; k++) X[t][k] = 8'($urandom);
    for (int k = 0; k < K + R; k++) for (int c = 0; c < C; c++) W[k][c] = 8'($urandom);
    for (int t = 0; t < T; t++) for (int c = 0; c < C; c++) begin
      y_ref[t][c] = 0;
      for (int k = 0; k < K; k++) y_ref[t][c] += int'(X[t][k]) * int'(W[k][c]);
    end
    for (int i = 0; i < 512; i++) begin u_flash.poke(i, {4{$urandom}}); u_dram.poke(i, '0); end
    // flash image of the input buffer: bank r line l byte b = X[(l % LPT)*BB + b][tile*R + r],
    // tile = l / LPT (tile 1 starts at byte T of every bank)
    for (int r = 0; r < R; r++) for (int l = 0; l < LINES; l++) begin
      beat = '0;
      for (int b = 0; b < BB; b++)
        if (l < 2 * LPT) beat[8*b +: 8] = X[(l % LPT) * BB + b][(l / LPT) * R + r];
      u_flash.poke(X_OFF + r * LINES + l, beat);
    end
    // flash image of the weight buffer: slot s, row r = W[s*R + r][0..C-1] (one beat, C <= BB)
    for (int s = 0; s < 3; s++) for (int r = 0; r < R; r++) begin
      beat = '0;
      for (int c = 0; c < C; c++) beat[8*c +: 8] = W[s * R + r][c];
      u_flash.poke(W_OFF + s * R + r, beat);
    end

    repeat (3) @(posedge clk); rst_n = 1;
    repeat (2) @(posedge clk);

    // ---- 2. peer-to-peer flash -> DRAM, with host storage reads alongside ----
    csr_wr(CSR_DMA_SRC, BW'(32'h0000_0000 | X_OFF));
    csr_wr(CSR_DMA_DST, BW'(32'h1000_0000 | X_OFF));
    csr_wr(CSR_DMA_LEN, BW'(IN_BEATS));
    for (int i = 0; i < 24; i++) begin
      hrd(32'(OTHER + i), d);
      checks++; n_bypass++;
      if (d !== u_flash.peek(OTHER + i)) begin failures++; $display("host flash read %0d wrong", i); end
    end
    hwr(32'(OTHER + 50), 128'hFEED_F00D_1234_5678);
    hrd(32'(OTHER + 50), d); n_bypass += 2;
    expect_eq("host flash write/read", d == 128'hFEED_F00D_1234_5678, 1);
    do csr_rd(CSR_STATUS, d); while (d[3]);
    for (int i = 0; i < IN_BEATS; i++) begin
      checks++;
      if (u_dram.peek(i) !== u_flash.peek(i)) begin failures++; $display("P2P beat %0d wrong", i); end
    end

    // ---- 3. program ----
    prog.push_back(mk(OP_DMA, 0, 32'h1000_0000 | W_OFF, 32'h3000_0000, 2 * R, 0, 0, 0));        // weights, slots 0-1
    prog.push_back(mk(OP_DMA, 0, 32'h1000_0000 | X_OFF, 32'h2000_0000, R * LINES, 0, 0, 0));    // activations
    prog.push_back(mk(OP_WAIT, 0, 0, 0, 0, 0, 0, 1));
    prog.push_back(mk(OP_GEMM, 0, 0, 0, T, 0, 0, 0));                                           // k = 0..7
    prog.push_back(mk(OP_DMA, 0, 32'h1000_0000 | W2_OFF, 32'h3000_0000 | (2 * R), R, 0, 0, 0)); // spare tile, slot 2
    prog.push_back(mk(OP_GEMM, 0, T, 0, T, 1, 0, 1));                                      // k = 8..15, accumulate
    prog.push_back(mk(OP_VEC, V_RELU, 0, 0, T, 0, 0, (1 << VF_A_OBUF) | (1 << VF_A_STRIDE) | (1 << VF_D_STRIDE)));
    prog.push_back(mk(OP_DMA, 0, 32'h4000_0000, 32'h1000_0000 | Y_OFF, T * VGRP, 0, 0, 0));     // raw sums out
    prog.push_back(mk(OP_WAIT, 0, 0, 0, 0, 0, 0, 7));
    prog.push_back(mk(OP_DMA, 0, 32'h5000_0000, 32'h1000_0000 | Z_OFF, T * VGRP, 0, 0, 0));     // ReLU result out
    prog.push_back(mk(OP_END, 0, 0, 0, 0, 0, 0, 0));
    foreach (prog[i]) put(i + 2, prog[i]);
    csr_wr(CSR_PC, BW'(2));
    t_start = $time;
    csr_wr(CSR_CTRL, BW'(1));

    // ---- 4. completion and write-back ----
    while (!irq) @(negedge clk);
    csr_rd(CSR_STATUS, d);
    expect_eq("status done+irq", d[2:0], 3'b110);
    csr_rd(CSR_CYCLES, d);
    checks++;
    if (d[31:0] == 0 || d[31:0] > ($time - t_start) / 10) begin failures++; $display("cycle count %0d", d[31:0]); end
    $display("program ran %0d cycles", d[31:0]);
    csr_wr(CSR_CTRL, BW'(2));
    expect_eq("irq cleared", irq, 0);
    csr_wr(CSR_DMA_SRC, BW'(32'h1000_0000 | Y_OFF));
    csr_wr(CSR_DMA_DST, BW'(32'h0000_0000 | WB_OFF));
    csr_wr(CSR_DMA_LEN, BW'(OUT_BEATS));
    do csr_rd(CSR_STATUS, d); while (d[3]);
    for (int w = 0; w < T; w++) for (int g = 0; g < VGRP; g++) begin
      logic [BW-1:0] ry, rz;
      hrd(32'(WB_OFF + w * VGRP + g), ry);
      hrd(32'(WB_OFF + T * VGRP + w * VGRP + g), rz);
      n_bypass += 2;
      for (int j = 0; j < LPB; j++) begin
        int c;
        c = g * LPB + j;
        expect_eq($sformatf("y[%0d][%0d]", w, c), int'(signed'(ry[32*j +: 32])), y_ref[w][c]);
        expect_eq($sformatf("relu[%0d][%0d]", w, c), int'(signed'(rz[32*j +: 32])), y_ref[w][c] > 0 ? y_ref[w][c] : 0);
      end
    end
    // the spare tile landed in slot 2 while the MPU was computing
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++)
      expect_eq("spare weight", int'(spare[r][c]), int'(W[2 * R + r][c]));

    // ---- mechanisms ----
    $display("mechanisms: gemm tiles %0d, vector ops %0d, accumulate updates %0d, DMA/MPU overlap cycles %0d,",
             n_gemm, n_vec, obuf_acc_count, n_overlap);
    $display("  buffer-port stalls (VPU holding the output buffer) %0d, flash contention %0d, DRAM stalls %0d,",
             n_buf_stall, flash_conflicts, n_dram_stall);
    $display("  host bypass accesses %0d, interrupts %0d", n_bypass, n_irq);
    expect_eq("gemm tiles", n_gemm, 2);
    expect_eq("vector ops", n_vec, 1);
    expect_eq("accumulate updates", obuf_acc_count, T * C);
    checks++; if (n_overlap == 0) begin failures++; $display("DMA never overlapped the MPU"); end
    checks++; if (n_buf_stall == 0) begin failures++; $display("DMA never stalled on the VPU"); end
    checks++; if (flash_conflicts == 0) begin failures++; $display("flash port never contended"); end
    checks++; if (n_dram_stall == 0) begin failures++; $display("DRAM never stalled"); end
    expect_eq("interrupts", n_irq, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
