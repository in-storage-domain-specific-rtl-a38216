// tb_vpu: vector instructions on a reduced 8-lane VPU.
// Loads the lane banks through the DMA beat port, runs element-wise add (strided), a MACC dot
// product (destination fixed), ReLU with operand a from the output buffer (played by the
// testbench), LeakyReLU, and an 8x8 transpose through the lane rotation network; results are
// read back through the DMA port and compared with models kept here. Also checks the busy time
// (len + 2 cycles after the accepting edge) and that the DMA port is refused while busy.
module tb_vpu;
  import dscs_pkg::*;
  localparam int C = 8, VD = 64, OD = 32, BW = 64, LPB = BW / 32, NG = C / LPB;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, busy, ob_rd_en, dma_we, dma_rd, dma_ready;
  vop_e op; logic [15:0] a_base, b_base, d_base, len, imm; logic [5:0] flags;
  logic [4:0] ob_rd_addr [C]; logic [31:0] ob_rd_data [C];
  logic [7:0] dma_beat; logic [BW-1:0] dma_wdata, dma_rdata;
  int M [C][VD];      // lane-bank model
  int OB [C][OD];     // output buffer contents

  vpu #(.COLS(C), .VM_DEPTH(VD), .OB_DEPTH(OD), .BUS_W(BW)) dut (.*);

  always_ff @(posedge clk) if (ob_rd_en) for (int c = 0; c < C; c++) ob_rd_data[c] <= OB[c][ob_rd_addr[c]];

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic dma_write_all();
    for (int w = 0; w < VD; w++) for (int g = 0; g < NG; g++) begin
      @(negedge clk); dma_we = 1; dma_beat = 8'(w * NG + g);
      for (int l = 0; l < LPB; l++) begin
        M[g * LPB + l][w] = $urandom_range(0, 2000) - 1000;
        dma_wdata[l*32 +: 32] = M[g * LPB + l][w];
      end
    end
    @(negedge clk); dma_we = 0;
  endtask

  task automatic check_all(string what);
    for (int w = 0; w < VD; w++) for (int g = 0; g < NG; g++) begin
      @(negedge clk); dma_rd = 1; dma_beat = 8'(w * NG + g);
      @(posedge clk); #1;
      for (int l = 0; l < LPB; l++) begin
        checks++;
        if (int'(dma_rdata[l*32 +: 32]) != M[g * LPB + l][w]) begin
          failures++;
          $display("%s: lane %0d word %0d got %0d exp %0d", what, g * LPB + l, w, int'(dma_rdata[l*32 +: 32]), M[g * LPB + l][w]);
        end
      end
    end
    @(negedge clk); dma_rd = 0;
  endtask

  task automatic issue(vop_e o, int a, int b, int d, int n, int im, logic [5:0] fl);
    int cyc;
    @(negedge clk); start = 1; op = o; a_base = 16'(a); b_base = 16'(b); d_base = 16'(d);
    len = 16'(n); imm = 16'(im); flags = fl;
    @(posedge clk); #1; start = 0;
    cyc = 0;
    while (busy) begin
      checks++;
      if (dma_ready) begin failures++; $display("dma_ready while busy"); end
      @(posedge clk); #1; cyc++;
    end
    checks++;
    if (cyc != n + 2) begin failures++; $display("busy for %0d cycles, expected %0d", cyc, n + 2); end
  endtask

  initial begin
    int tmp [C][VD];
    start = 0; op = V_MOV; a_base = 0; b_base = 0; d_base = 0; len = 0; imm = 0; flags = 0;
    dma_we = 0; dma_rd = 0; dma_beat = 0; dma_wdata = 0;
    for (int c = 0; c < C; c++) for (int w = 0; w < OD; w++) OB[c][w] = $urandom_range(0, 2000) - 1000;
    repeat (2) @(posedge clk); rst_n = 1;
    dma_write_all();
    check_all("dma");
    // add: d[32+i] = a[0+i] + b[16+i]
    issue(V_ADD, 0, 16, 32, 16, 0, 6'b001110);
    for (int c = 0; c < C; c++) for (int i = 0; i < 16; i++) M[c][32 + i] = M[c][i] + M[c][16 + i];
    check_all("add");
    // dot product of words 0..9 and 10..19 into word 50
    issue(V_MACC, 0, 10, 50, 10, 0, 6'b000110);
    for (int c = 0; c < C; c++) begin
      int acc;
      acc = 0;
      for (int i = 0; i < 10; i++) acc += M[c][i] * M[c][10 + i];
      M[c][50] = acc;
    end
    check_all("macc");
    // ReLU of output-buffer words 4..23 into 20..39
    issue(V_RELU, 4, 0, 20, 20, 0, 6'b001011);
    for (int c = 0; c < C; c++) for (int i = 0; i < 20; i++) M[c][20 + i] = OB[c][4 + i] < 0 ? 0 : OB[c][4 + i];
    check_all("relu");
    // LeakyReLU in place is not allowed (read ahead of write); use 40..47 -> 0..7
    issue(V_LRELU, 40, 0, 0, 8, 2, 6'b001010);
    for (int c = 0; c < C; c++) for (int i = 0; i < 8; i++) M[c][i] = M[c][40 + i] < 0 ? (M[c][40 + i] >>> 2) : M[c][40 + i];
    check_all("lrelu");
    // transpose the 8x8 block at word 8 (element [r][c] in lane c word 8+r) into word 56
    issue(V_TRN, 8, 0, 56, C, 0, 6'b000000);
    for (int r = 0; r < C; r++) for (int c = 0; c < C; c++) tmp[c][r] = M[c][8 + r];
    for (int r = 0; r < C; r++) for (int c = 0; c < C; c++) M[r][56 + c] = tmp[c][r];
    check_all("transpose");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
