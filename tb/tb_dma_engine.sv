// tb_dma_engine: transfers between two memory models (flash and DRAM, both stalling at
// random; DRAM never stalls) and a third model on the accelerator port, checking every
// destination word against the source afterwards: flash->DRAM (the P2P path), DRAM->accelerator,
// accelerator->DRAM and a DRAM->DRAM copy on a single port. Also checks the zero-stall rate:
// with no stalls a long transfer must finish within len + read latency + 3 cycles.
module tb_dma_engine;
  import dscs_pkg::*;
  localparam int BW = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic cmd_valid, cmd_ready, busy, done;
  logic [31:0] cmd_src, cmd_dst; logic [15:0] cmd_len;
  logic [2:0] req_valid, req_ready, req_we, rsp_valid;
  logic [31:0] req_addr [3]; logic [BW-1:0] req_wdata [3], rsp_rdata [3];
  int stall_sel = 20;

  dma_engine #(.BUS_W(BW)) dut (.*);

  mem_model #(.BUS_W(BW), .DEPTH(4096), .LAT(7), .STALL(20)) u_flash (.clk, .req_valid(req_valid[0]), .req_ready(req_ready[0]),
    .req_we(req_we[0]), .req_addr(req_addr[0]), .req_wdata(req_wdata[0]), .rsp_valid(rsp_valid[0]), .rsp_rdata(rsp_rdata[0]));
  mem_model #(.BUS_W(BW), .DEPTH(4096), .LAT(3), .STALL(0)) u_dram (.clk, .req_valid(req_valid[1]), .req_ready(req_ready[1]),
    .req_we(req_we[1]), .req_addr(req_addr[1]), .req_wdata(req_wdata[1]), .rsp_valid(rsp_valid[1]), .rsp_rdata(rsp_rdata[1]));
  mem_model #(.BUS_W(BW), .DEPTH(4096), .LAT(1), .STALL(0)) u_dsa (.clk, .req_valid(req_valid[2]), .req_ready(req_ready[2]),
    .req_we(req_we[2]), .req_addr(req_addr[2]), .req_wdata(req_wdata[2]), .rsp_valid(rsp_valid[2]), .rsp_rdata(rsp_rdata[2]));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic xfer(logic [31:0] s, logic [31:0] d, int n, output int cyc);
    int dones = 0;
    @(negedge clk); cmd_valid = 1; cmd_src = s; cmd_dst = d; cmd_len = 16'(n);
    while (!cmd_ready) @(negedge clk);
    @(posedge clk); #1; cmd_valid = 0; cyc = 1;
    while (busy) begin @(posedge clk); #1; cyc++; if (done) dones++; end
    checks++;
    if (dones != 1) begin failures++; $display("done pulsed %0d times", dones); end
  endtask

  function automatic logic [BW-1:0] rd(int port, int a);
    case (port)
      0: return u_flash.peek(a);
      1: return u_dram.peek(a);
      default: return u_dsa.peek(a);
    endcase
  endfunction

  task automatic compare(int sp, int sa, int dp, int da, int n, string what);
    for (int i = 0; i < n; i++) begin
      checks++;
      if (rd(sp, sa + i) !== rd(dp, da + i)) begin failures++; $display("%s beat %0d differs", what, i); end
    end
  endtask

  initial begin
    int cyc;
    cmd_valid = 0; cmd_src = 0; cmd_dst = 0; cmd_len = 0;
    for (int i = 0; i < 4096; i++) begin
      u_flash.poke(i, {$urandom, $urandom}); u_dram.poke(i, {$urandom, $urandom}); u_dsa.poke(i, {$urandom, $urandom});
    end
    repeat (2) @(posedge clk); rst_n = 1;
    xfer({SP_FLASH, 28'd100}, {SP_DRAM, 28'd0}, 300, cyc);   compare(0, 100, 1, 0, 300, "flash->dram");
    xfer({SP_DRAM, 28'd0}, {SP_IBUF, 28'd50}, 200, cyc);     compare(1, 0, 2, 50, 200, "dram->ibuf");
    xfer({SP_VMEM, 28'd1000}, {SP_DRAM, 28'd2000}, 77, cyc); compare(2, 1000, 1, 2000, 77, "vmem->dram");
    xfer({SP_DRAM, 28'd2000}, {SP_DRAM, 28'd3000}, 60, cyc); compare(1, 2000, 1, 3000, 60, "dram->dram");
    xfer({SP_DRAM, 28'd5}, {SP_FLASH, 28'd3000}, 1, cyc);    compare(1, 5, 0, 3000, 1, "single beat");
    // rate: DRAM (latency 3) and accelerator port never stall: one beat per cycle
    xfer({SP_DRAM, 28'd0}, {SP_WBUF, 28'd2048}, 1000, cyc);  compare(1, 0, 2, 2048, 1000, "dram->wbuf");
    checks++;
    if (cyc > 1000 + 3 + 3) begin failures++; $display("1000-beat transfer took %0d cycles", cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
