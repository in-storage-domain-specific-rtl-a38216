// dsa_csr: the accelerator's host-visible registers and interrupt.
//
// The host driver maps these registers over PCIe: it writes the compiled program into the
// instruction memory, sets the start address, starts the run, and is interrupted when the
// program ends; it also queues peer-to-peer DMA transfers (for example flash to drive DRAM)
// by writing source, destination and length. Register offsets are in dscs_pkg (CSR_*);
// host address bit 12 set selects the instruction memory, one 128-bit instruction per word
// taken from wdata[127:0]. The published design has a driver that maps the accelerator's
// configuration registers and memory, starts P2P transfers, and an interrupt to the host
// when a function finishes; the register map is this design's choice.
//
// Port: req_valid with req_we/req_addr/req_wdata, always ready; reads answer on the next
// cycle with rsp_valid/rsp_rdata. irq stays high until the host writes CTRL bit 1.
module dsa_csr
  import dscs_pkg::*;
#(
  parameter int unsigned BUS_W      = dscs_pkg::DEF_BUS_W,
  parameter int unsigned IMEM_DEPTH = dscs_pkg::DEF_IMEM_DEPTH,
  localparam int unsigned PW        = $clog2(IMEM_DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req_valid,
  output logic             req_ready,
  input  logic             req_we,
  input  logic [31:0]      req_addr,
  input  logic [BUS_W-1:0] req_wdata,
  output logic             rsp_valid,
  output logic [BUS_W-1:0] rsp_rdata,
  // controller
  output logic             imem_we,
  output logic [PW-1:0]    imem_waddr,
  output instr_t           imem_wdata,
  output logic             start,
  output logic [PW-1:0]    start_pc,
  input  logic             ctl_busy,
  input  logic             ctl_done,
  input  logic [31:0]      ctl_cycles,
  // host-initiated DMA
  output logic             dma_valid,
  input  logic             dma_ready,
  output logic [31:0]      dma_src,
  output logic [31:0]      dma_dst,
  output logic [15:0]      dma_len,
  input  logic             dma_busy,
  output logic             irq
);
  logic        done_q;
  logic        dma_pend;
  logic [11:0] off;
  logic        wr, rd;
  assign off = req_addr[11:0];
  assign wr  = req_valid && req_we;
  assign rd  = req_valid && !req_we;
  assign req_ready = 1'b1;

  assign imem_we    = wr && req_addr[12];
  assign imem_waddr = PW'(req_addr[11:0]);
  assign imem_wdata = instr_t'(req_wdata[127:0]);
  assign start      = wr && !req_addr[12] && off == CSR_CTRL && req_wdata[0] && !ctl_busy;
  assign dma_valid  = dma_pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done_q <= 1'b0; irq <= 1'b0; start_pc <= '0; dma_src <= '0; dma_dst <= '0;
      dma_len <= '0; dma_pend <= 1'b0; rsp_valid <= 1'b0; rsp_rdata <= '0;
    end else begin
      rsp_valid <= rd;
      if (start)    done_q <= 1'b0;
      if (ctl_done) begin done_q <= 1'b1; irq <= 1'b1; end
      if (dma_pend && dma_ready) dma_pend <= 1'b0;
      if (wr && !req_addr[12]) begin
        unique case (off)
          CSR_CTRL:    if (req_wdata[1]) irq <= 1'b0;
          CSR_PC:      start_pc <= PW'(req_wdata[31:0]);
          CSR_DMA_SRC: dma_src  <= req_wdata[31:0];
          CSR_DMA_DST: dma_dst  <= req_wdata[31:0];
          CSR_DMA_LEN: begin dma_len <= req_wdata[15:0]; dma_pend <= 1'b1; end
          default: ;
        endcase
      end
      if (rd) begin
        rsp_rdata <= '0;
        unique case (off)
          CSR_STATUS:  rsp_rdata[3:0] <= {dma_busy || dma_pend, irq, done_q, ctl_busy};
          CSR_PC:      rsp_rdata[PW-1:0] <= start_pc;
          CSR_DMA_SRC: rsp_rdata[31:0] <= dma_src;
          CSR_DMA_DST: rsp_rdata[31:0] <= dma_dst;
          CSR_CYCLES:  rsp_rdata[31:0] <= ctl_cycles;
          default: ;
        endcase
      end
    end
  end
endmodule
