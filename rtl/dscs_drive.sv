// dscs_drive: digital core of a domain-specific computational storage drive.
//
// The drive keeps its storage role and adds an accelerator for machine-learning serverless
// functions next to the flash. Host requests arrive from the PCIe/NVMe interface and are
// switched either to the flash side (ordinary storage traffic, accelerator bypassed) or to
// the accelerator's registers. The DMA engine moves data peer-to-peer between flash, the
// drive's DRAM staging buffer and the accelerator's on-chip buffers without the host. A
// function runs as: host queues a flash-to-DRAM transfer, loads and starts the accelerator's
// program, the program pulls tiles from DRAM, computes on the MPU and VPU and pushes results to
// DRAM, the accelerator interrupts the host, and the host queues the DRAM-to-flash write-back.
//
// The flash array with its SSD controller (PHY, ECC, flash controller), the DRAM with its
// memory controller and the PCIe/NVMe host interface are existing parts the design connects
// to; they appear here as ports that follow the request/response protocol of dma_engine
// (valid/ready request, in-order read responses). The defaults give the published main
// configuration: a 128 x 128 PE array and 4 MB of on-chip buffers (1 MB input, 1 MB weights,
// 1 MB output, 1 MB vector banks; the split is this design's choice) and a 256-bit data bus.
module dscs_drive
  import dscs_pkg::*;
#(
  parameter int unsigned ROWS       = dscs_pkg::DEF_ROWS,
  parameter int unsigned COLS       = dscs_pkg::DEF_COLS,
  parameter int unsigned BUS_W      = dscs_pkg::DEF_BUS_W,
  parameter int unsigned IB_DEPTH   = dscs_pkg::DEF_IB_DEPTH,
  parameter int unsigned WB_DEPTH   = dscs_pkg::DEF_WB_DEPTH,
  parameter int unsigned OB_DEPTH   = dscs_pkg::DEF_OB_DEPTH,
  parameter int unsigned VM_DEPTH   = dscs_pkg::DEF_VM_DEPTH,
  parameter int unsigned IMEM_DEPTH = dscs_pkg::DEF_IMEM_DEPTH
) (
  input  logic             clk,
  input  logic             rst_n,
  // host PCIe/NVMe interface
  input  logic             host_req_valid,
  output logic             host_req_ready,
  input  logic             host_req_we,
  input  logic [31:0]      host_req_addr,
  input  logic [BUS_W-1:0] host_req_wdata,
  output logic             host_rsp_valid,
  output logic [BUS_W-1:0] host_rsp_rdata,
  output logic             irq,
  // flash side (SSD controller)
  output logic             flash_req_valid,
  input  logic             flash_req_ready,
  output logic             flash_req_we,
  output logic [31:0]      flash_req_addr,
  output logic [BUS_W-1:0] flash_req_wdata,
  input  logic             flash_rsp_valid,
  input  logic [BUS_W-1:0] flash_rsp_rdata,
  // drive DRAM (memory controller)
  output logic             dram_req_valid,
  input  logic             dram_req_ready,
  output logic             dram_req_we,
  output logic [31:0]      dram_req_addr,
  output logic [BUS_W-1:0] dram_req_wdata,
  input  logic             dram_rsp_valid,
  input  logic [BUS_W-1:0] dram_rsp_rdata,
  // observability
  output logic [31:0]      flash_conflicts,
  output logic [31:0]      obuf_acc_count,
  output logic             dma_busy,
  output logic             mpu_busy,
  output logic             vpu_busy
);
  logic             c_req_valid, c_req_we, c_rsp_valid;
  logic [31:0]      c_req_addr;
  logic [BUS_W-1:0] c_req_wdata, c_rsp_rdata;

  logic             cmd_valid, cmd_ready, dma_done;
  logic [31:0]      cmd_src, cmd_dst;
  logic [15:0]      cmd_len;
  logic [2:0]       m_valid, m_ready, m_we, m_rsp_valid;
  logic [31:0]      m_addr  [3];
  logic [BUS_W-1:0] m_wdata [3];
  logic [BUS_W-1:0] m_rdata [3];

  host_switch #(.BUS_W(BUS_W)) u_switch (
    .clk, .rst_n,
    .h_req_valid(host_req_valid), .h_req_ready(host_req_ready), .h_req_we(host_req_we),
    .h_req_addr(host_req_addr), .h_req_wdata(host_req_wdata),
    .h_rsp_valid(host_rsp_valid), .h_rsp_rdata(host_rsp_rdata),
    .d_req_valid(m_valid[PORT_FLASH]), .d_req_ready(m_ready[PORT_FLASH]),
    .d_req_we(m_we[PORT_FLASH]), .d_req_addr(m_addr[PORT_FLASH]),
    .d_req_wdata(m_wdata[PORT_FLASH]), .d_rsp_valid(m_rsp_valid[PORT_FLASH]),
    .d_rsp_rdata(m_rdata[PORT_FLASH]),
    .f_req_valid(flash_req_valid), .f_req_ready(flash_req_ready), .f_req_we(flash_req_we),
    .f_req_addr(flash_req_addr), .f_req_wdata(flash_req_wdata),
    .f_rsp_valid(flash_rsp_valid), .f_rsp_rdata(flash_rsp_rdata),
    .c_req_valid, .c_req_we, .c_req_addr, .c_req_wdata, .c_rsp_valid, .c_rsp_rdata,
    .conflicts(flash_conflicts)
  );

  dma_engine #(.BUS_W(BUS_W)) u_dma (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd_src, .cmd_dst, .cmd_len, .busy(dma_busy), .done(dma_done),
    .req_valid(m_valid), .req_ready(m_ready), .req_we(m_we), .req_addr(m_addr),
    .req_wdata(m_wdata), .rsp_valid(m_rsp_valid), .rsp_rdata(m_rdata)
  );

  assign dram_req_valid          = m_valid[PORT_DRAM];
  assign m_ready[PORT_DRAM]      = dram_req_ready;
  assign dram_req_we             = m_we[PORT_DRAM];
  assign dram_req_addr           = {4'd0, m_addr[PORT_DRAM][27:0]};
  assign dram_req_wdata          = m_wdata[PORT_DRAM];
  assign m_rsp_valid[PORT_DRAM]  = dram_rsp_valid;
  assign m_rdata[PORT_DRAM]      = dram_rsp_rdata;

  dsa_top #(
    .ROWS(ROWS), .COLS(COLS), .BUS_W(BUS_W), .IB_DEPTH(IB_DEPTH), .WB_DEPTH(WB_DEPTH),
    .OB_DEPTH(OB_DEPTH), .VM_DEPTH(VM_DEPTH), .IMEM_DEPTH(IMEM_DEPTH)
  ) u_dsa (
    .clk, .rst_n,
    .csr_req_valid(c_req_valid), .csr_req_we(c_req_we), .csr_req_addr(c_req_addr),
    .csr_req_wdata(c_req_wdata), .csr_rsp_valid(c_rsp_valid), .csr_rsp_rdata(c_rsp_rdata),
    .irq,
    .dma_valid(cmd_valid), .dma_ready(cmd_ready), .dma_src(cmd_src), .dma_dst(cmd_dst),
    .dma_len(cmd_len), .dma_busy,
    .buf_req_valid(m_valid[PORT_DSA]), .buf_req_ready(m_ready[PORT_DSA]),
    .buf_req_we(m_we[PORT_DSA]), .buf_req_addr(m_addr[PORT_DSA]),
    .buf_req_wdata(m_wdata[PORT_DSA]), .buf_rsp_valid(m_rsp_valid[PORT_DSA]),
    .buf_rsp_rdata(m_rdata[PORT_DSA]),
    .obuf_acc_count, .mpu_busy, .vpu_busy
  );
endmodule
