// tb_mpu: GEMM tiles on a reduced 8x8 array.
// The testbench plays the input buffer (one registered byte read per row), loads two weight
// slots through the WB load port, runs tiles of random int8 data and compares every column
// result, in order, with a reference matrix product. It also checks the tile latency
// (start to busy falling = nvec + ROWS + COLS + 2 cycles) and that the second slot is used.
module tb_mpu;
  localparam int R = 8, C = 8, IBD = 64, WBD = 4, BW = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, wb_we;
  logic [5:0] ibuf_base;
  logic [15:0] nvec;
  logic [1:0] slot, wb_slot;
  logic [R-1:0] ib_rd_en;
  logic [5:0] ib_rd_addr [R];
  logic [7:0] ib_rd_data [R];
  logic [2:0] wb_row;
  logic [0:0] wb_grp;
  logic [BW-1:0] wb_wdata;
  logic [C-1:0] col_vld;
  logic [31:0] col_psum [C];

  mpu #(.ROWS(R), .COLS(C), .IB_DEPTH(IBD), .WB_DEPTH(WBD), .BUS_W(BW)) dut (.*);

  logic signed [7:0] X [IBD][R];     // X[address][row]
  logic signed [7:0] W [WBD][R][C];
  always_ff @(posedge clk)
    for (int r = 0; r < R; r++) if (ib_rd_en[r]) ib_rd_data[r] <= X[ib_rd_addr[r]][r];

  int got [C][$];

  always @(posedge clk) for (int c = 0; c < C; c++) if (col_vld[c]) got[c].push_back(col_psum[c]);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_tile(int base, int n, int s);
    int cyc;
    for (int c = 0; c < C; c++) got[c].delete();
    @(negedge clk); start = 1; ibuf_base = 6'(base); nvec = 16'(n); slot = 2'(s);
    @(posedge clk); #1; start = 0;
    cyc = 1;
    while (busy) begin @(posedge clk); #1; cyc++; end
    checks++;
    if (cyc != n + R + C + 2) begin failures++; $display("latency %0d expected %0d", cyc, n + R + C + 2); end
    for (int c = 0; c < C; c++) begin
      checks++;
      if (got[c].size() != n) begin failures++; $display("col %0d delivered %0d of %0d", c, got[c].size(), n); continue; end
      for (int t = 0; t < n; t++) begin
        int exp_v = 0;
        for (int r = 0; r < R; r++) exp_v += X[base + t][r] * W[s][r][c];
        checks++;
        if (got[c][t] != exp_v) begin failures++; $display("y[%0d][%0d]=%0d exp %0d", t, c, got[c][t], exp_v); end
      end
    end
  endtask

  initial begin
    start = 0; wb_we = 0; ibuf_base = 0; nvec = 0; slot = 0; wb_slot = 0; wb_row = 0; wb_grp = 0; wb_wdata = 0;
    for (int r = 0; r < R; r++) ib_rd_data[r] = 0;
    for (int a = 0; a < IBD; a++) for (int r = 0; r < R; r++) X[a][r] = 8'($urandom);
    X[0][0] = -128;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int s = 0; s < WBD; s++) for (int r = 0; r < R; r++) begin
      @(negedge clk); wb_we = 1; wb_slot = 2'(s); wb_row = 3'(r); wb_grp = 0;
      for (int c = 0; c < C; c++) begin W[s][r][c] = 8'($urandom); wb_wdata[c*8 +: 8] = W[s][r][c]; end
    end
    @(negedge clk); wb_we = 0;
    run_tile(0, 16, 0);
    run_tile(5, 1, 2);
    run_tile(20, 40, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
