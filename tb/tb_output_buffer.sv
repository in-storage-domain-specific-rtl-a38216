// tb_output_buffer: checks overwrite and accumulate tiles on a reduced 8-bank buffer.
// Column results arrive with per-column skew (column c starts c cycles later, as from the
// array); the test then reads back through the VPU port and through the DMA beat port and
// compares with sums computed here. Also checks that the DMA port is refused on a cycle the
// VPU reads, and the count of accumulate updates.
module tb_output_buffer;
  localparam int C = 8, D = 32, BW = 64, LPB = BW / 32, NG = C / LPB;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic tile_start, tile_acc, rd_en, dma_rd, dma_ready;
  logic [4:0] tile_base; logic [C-1:0] col_vld; logic [31:0] col_psum [C];
  logic [4:0] rd_addr [C]; logic [31:0] rd_data [C];
  logic [6:0] dma_beat; logic [BW-1:0] dma_data; logic [31:0] acc_count;
  int ref_m [C][D];

  output_buffer #(.COLS(C), .DEPTH(D), .BUS_W(BW)) dut (.*);

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tile(int base, int n, bit acc);
    int v [C][$];
    @(negedge clk); tile_start = 1; tile_base = 5'(base); tile_acc = acc;
    @(negedge clk); tile_start = 0;
    for (int c = 0; c < C; c++) for (int t = 0; t < n; t++) v[c].push_back($urandom_range(0, 100000) - 50000);
    for (int k = 0; k < n + C; k++) begin
      for (int c = 0; c < C; c++) begin
        col_vld[c] = (k >= c) && (k - c < n);
        col_psum[c] = col_vld[c] ? v[c][k - c] : 32'hDEAD;
        if (col_vld[c]) ref_m[c][base + k - c] = acc ? ref_m[c][base + k - c] + v[c][k - c] : v[c][k - c];
      end
      @(negedge clk);
    end
    col_vld = '0;
  endtask

  initial begin
    int acc0;
    tile_start = 0; tile_acc = 0; tile_base = 0; col_vld = 0; rd_en = 0; dma_rd = 0; dma_beat = 0;
    for (int c = 0; c < C; c++) begin rd_addr[c] = 0; col_psum[c] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    tile(0, 20, 0);
    tile(4, 10, 1);
    acc0 = acc_count;
    tile(0, 6, 1);
    checks++;
    if (acc_count - acc0 != 6 * C) begin failures++; $display("acc_count %0d", acc_count - acc0); end
    // VPU reads
    for (int k = 0; k < 60; k++) begin
      int a [C];
      @(negedge clk); rd_en = 1; dma_rd = 1;
      for (int c = 0; c < C; c++) begin a[c] = $urandom_range(0, 19); rd_addr[c] = 5'(a[c]); end
      #1;
      checks++;
      if (dma_ready) begin failures++; $display("DMA not held off during VPU read"); end
      @(posedge clk); #1;
      for (int c = 0; c < C; c++) begin
        checks++;
        if (rd_data[c] !== ref_m[c][a[c]]) begin failures++; $display("vpu rd c%0d a%0d got %0d exp %0d", c, a[c], rd_data[c], ref_m[c][a[c]]); end
      end
    end
    @(negedge clk); rd_en = 0;
    // DMA reads
    for (int w = 0; w < 20; w++) for (int g = 0; g < NG; g++) begin
      @(negedge clk); dma_rd = 1; dma_beat = 7'(w * NG + g);
      @(posedge clk); #1;
      for (int l = 0; l < LPB; l++) begin
        checks++;
        if (dma_data[l*32 +: 32] !== ref_m[g * LPB + l][w]) begin failures++; $display("dma w%0d g%0d l%0d", w, g, l); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
