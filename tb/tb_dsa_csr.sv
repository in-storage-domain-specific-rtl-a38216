// tb_dsa_csr: host register accesses. Checks instruction-memory writes (index and data), the
// start pulse and start address, status read-back, that writing the DMA length queues one
// host DMA command that is held until accepted, and that the interrupt rises on done and
// stays until cleared.
module tb_dsa_csr;
  import dscs_pkg::*;
  localparam int BW = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic req_valid, req_ready, req_we, rsp_valid, imem_we, start, ctl_busy, ctl_done;
  logic dma_valid, dma_ready, dma_busy, irq;
  logic [31:0] req_addr, ctl_cycles, dma_src, dma_dst; logic [BW-1:0] req_wdata, rsp_rdata;
  logic [7:0] imem_waddr, start_pc; instr_t imem_wdata; logic [15:0] dma_len;
  int imem_writes = 0, starts = 0;

  dsa_csr #(.BUS_W(BW)) dut (.*);

  always @(posedge clk) if (rst_n) begin
    if (imem_we) begin
      imem_writes++;
      checks++;
      if (imem_waddr != 8'h21 || imem_wdata != instr_t'(128'h0123_4567_89AB_CDEF_0011_2233_4455_6677)) begin failures++; $display("imem write wrong"); end
    end
    if (start) starts++;
  end

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(logic [31:0] a, logic [BW-1:0] d);
    @(negedge clk); req_valid = 1; req_we = 1; req_addr = a; req_wdata = d;
    @(negedge clk); req_valid = 0; req_we = 0;
  endtask
  task automatic rd(logic [31:0] a, output logic [BW-1:0] d);
    @(negedge clk); req_valid = 1; req_we = 0; req_addr = a;
    @(posedge clk); #1; req_valid = 0;
    checks++;
    if (!rsp_valid) begin failures++; $display("no read response"); end
    d = rsp_rdata;
  endtask
  task automatic expect_eq(string w, logic [31:0] g, logic [31:0] e);
    checks++;
    if (g !== e) begin failures++; $display("%s got %h exp %h", w, g, e); end
  endtask

  initial begin
    logic [BW-1:0] d;
    req_valid = 0; req_we = 0; req_addr = 0; req_wdata = 0; ctl_busy = 0; ctl_done = 0; ctl_cycles = 32'd1234;
    dma_ready = 0; dma_busy = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    wr(32'h8000_1021, {128'd0, 128'h0123_4567_89AB_CDEF_0011_2233_4455_6677});
    expect_eq("imem writes", imem_writes, 1);
    wr(32'h8000_0000 | CSR_PC, 256'd33);
    rd(32'h8000_0000 | CSR_PC, d); expect_eq("pc", d[31:0], 33);
    expect_eq("start_pc", start_pc, 33);
    wr(32'h8000_0000 | CSR_CTRL, 256'd1);
    expect_eq("starts", starts, 1);
    ctl_busy = 1;
    wr(32'h8000_0000 | CSR_CTRL, 256'd1);          // ignored while busy
    expect_eq("no restart", starts, 1);
    rd(32'h8000_0000 | CSR_STATUS, d); expect_eq("status busy", d[31:0], 32'b0001);
    @(negedge clk); ctl_done = 1; ctl_busy = 0;
    @(negedge clk); ctl_done = 0;
    rd(32'h8000_0000 | CSR_STATUS, d); expect_eq("status done+irq", d[31:0], 32'b0110);
    expect_eq("irq", irq, 1);
    rd(32'h8000_0000 | CSR_CYCLES, d); expect_eq("cycles", d[31:0], 1234);
    wr(32'h8000_0000 | CSR_CTRL, 256'd2);
    expect_eq("irq cleared", irq, 0);
    // host DMA
    wr(32'h8000_0000 | CSR_DMA_SRC, 256'h0000_0040);
    wr(32'h8000_0000 | CSR_DMA_DST, 256'h1000_0000);
    wr(32'h8000_0000 | CSR_DMA_LEN, 256'd12);
    repeat (3) @(negedge clk);
    expect_eq("dma held", dma_valid, 1);
    expect_eq("dma src", dma_src, 32'h40); expect_eq("dma dst", dma_dst, 32'h1000_0000); expect_eq("dma len", dma_len, 12);
    rd(32'h8000_0000 | CSR_STATUS, d); expect_eq("status dma", d[3], 1);
    @(negedge clk); dma_ready = 1;
    @(negedge clk); dma_ready = 0;
    expect_eq("dma taken", dma_valid, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
