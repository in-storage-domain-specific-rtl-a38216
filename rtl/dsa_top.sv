// dsa_top: the in-storage domain-specific accelerator (DSA).
//
// A Matrix Processing Unit (ROWS x COLS weight-stationary systolic array with per-PE weight
// buffers) reads activations from a row-banked input buffer and writes, through per-column
// accumulators, into a column-banked output buffer; the Vector Processing Unit (COLS lanes)
// reads that output buffer directly and keeps its own per-lane banks. A controller runs the
// compiled program, handing data movement to the drive's DMA engine; host registers start the
// program and raise the completion interrupt. This is the organisation of the published
// accelerator; how the blocks are joined (the buffer port decode, the DMA command arbitration)
// is this design's choice.
//
// Buffer port (slave of the DMA engine), beat address with the space in bits [31:28]:
//   SP_IBUF  write  beat = bank * (IB_DEPTH/BB) + line
//   SP_WBUF  write  beat = (slot * ROWS + row) * NGRP + column group   (BB weights per beat)
//   SP_OBUF  read   beat = word * (COLS/LPB) + lane group              (LPB words per beat)
//   SP_VMEM  r/w    same layout as SP_OBUF
// (BB = BUS_W/8 bytes, LPB = BUS_W/32 words.) Writes to read-only spaces are dropped and reads
// of write-only spaces return zero. Read data returns one cycle after acceptance. OBUF and
// VMEM accesses wait while the VPU is running.
// DMA commands from the program and from the host registers share the DMA engine; the
// program's command wins when both are pending.
module dsa_top
  import dscs_pkg::*;
#(
  parameter int unsigned ROWS       = dscs_pkg::DEF_ROWS,
  parameter int unsigned COLS       = dscs_pkg::DEF_COLS,
  parameter int unsigned BUS_W      = dscs_pkg::DEF_BUS_W,
  parameter int unsigned IB_DEPTH   = dscs_pkg::DEF_IB_DEPTH,
  parameter int unsigned WB_DEPTH   = dscs_pkg::DEF_WB_DEPTH,
  parameter int unsigned OB_DEPTH   = dscs_pkg::DEF_OB_DEPTH,
  parameter int unsigned VM_DEPTH   = dscs_pkg::DEF_VM_DEPTH,
  parameter int unsigned IMEM_DEPTH = dscs_pkg::DEF_IMEM_DEPTH,
  localparam int unsigned BB    = BUS_W / 8,
  localparam int unsigned LPB   = BUS_W / 32,
  localparam int unsigned NGRP  = (COLS + BB - 1) / BB,
  localparam int unsigned VGRP  = (COLS + LPB - 1) / LPB,
  localparam int unsigned VGW   = (VGRP > 1) ? $clog2(VGRP) : 1,
  localparam int unsigned IAW   = $clog2(IB_DEPTH),
  localparam int unsigned IBW   = $clog2(ROWS) + $clog2(IB_DEPTH / BB),
  localparam int unsigned SW    = $clog2(WB_DEPTH),
  localparam int unsigned OAW   = $clog2(OB_DEPTH),
  localparam int unsigned VAW   = $clog2(VM_DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  // host register port
  input  logic             csr_req_valid,
  input  logic             csr_req_we,
  input  logic [31:0]      csr_req_addr,
  input  logic [BUS_W-1:0] csr_req_wdata,
  output logic             csr_rsp_valid,
  output logic [BUS_W-1:0] csr_rsp_rdata,
  output logic             irq,
  // command port to the DMA engine
  output logic             dma_valid,
  input  logic             dma_ready,
  output logic [31:0]      dma_src,
  output logic [31:0]      dma_dst,
  output logic [15:0]      dma_len,
  input  logic             dma_busy,
  // buffer port, served to the DMA engine
  input  logic             buf_req_valid,
  output logic             buf_req_ready,
  input  logic             buf_req_we,
  input  logic [31:0]      buf_req_addr,
  input  logic [BUS_W-1:0] buf_req_wdata,
  output logic             buf_rsp_valid,
  output logic [BUS_W-1:0] buf_rsp_rdata,
  // observability
  output logic [31:0]      obuf_acc_count,
  output logic             mpu_busy,
  output logic             vpu_busy
);
  // ------------------------------------------------------------ registers and controller
  localparam int unsigned PW = $clog2(IMEM_DEPTH);
  logic           imem_we, start, ctl_busy, ctl_done, csr_req_ready;
  logic [PW-1:0]  imem_waddr, start_pc;
  instr_t         imem_wdata;
  logic [31:0]    ctl_cycles;
  logic           c_dma_valid, c_dma_ready, h_dma_valid, h_dma_ready;
  logic [31:0]    c_dma_src, c_dma_dst, h_dma_src, h_dma_dst;
  logic [15:0]    c_dma_len, h_dma_len;

  logic           mpu_start, mpu_acc;
  logic [31:0]    mpu_ibase, mpu_obase;
  logic [15:0]    mpu_nvec, mpu_slot;
  logic           vpu_start;
  vop_e           vpu_op;
  logic [15:0]    vpu_a, vpu_b, vpu_d, vpu_len, vpu_imm;
  logic [5:0]     vpu_flags;

  dsa_csr #(.BUS_W(BUS_W), .IMEM_DEPTH(IMEM_DEPTH)) u_csr (
    .clk, .rst_n,
    .req_valid(csr_req_valid), .req_ready(csr_req_ready), .req_we(csr_req_we), .req_addr(csr_req_addr),
    .req_wdata(csr_req_wdata), .rsp_valid(csr_rsp_valid), .rsp_rdata(csr_rsp_rdata),
    .imem_we, .imem_waddr, .imem_wdata, .start, .start_pc,
    .ctl_busy, .ctl_done, .ctl_cycles,
    .dma_valid(h_dma_valid), .dma_ready(h_dma_ready), .dma_src(h_dma_src), .dma_dst(h_dma_dst),
    .dma_len(h_dma_len), .dma_busy, .irq
  );

  dsa_controller #(.IMEM_DEPTH(IMEM_DEPTH)) u_ctl (
    .clk, .rst_n, .imem_we, .imem_waddr, .imem_wdata, .start, .start_pc,
    .busy(ctl_busy), .done(ctl_done), .cycles(ctl_cycles),
    .dma_valid(c_dma_valid), .dma_ready(c_dma_ready), .dma_src(c_dma_src), .dma_dst(c_dma_dst),
    .dma_len(c_dma_len), .dma_busy,
    .mpu_start, .mpu_ibuf_base(mpu_ibase), .mpu_obuf_base(mpu_obase), .mpu_nvec, .mpu_slot,
    .mpu_acc, .mpu_busy,
    .vpu_start, .vpu_op, .vpu_a, .vpu_b, .vpu_d, .vpu_len, .vpu_imm, .vpu_flags, .vpu_busy
  );

  // DMA command arbitration: program first
  assign dma_valid   = c_dma_valid || h_dma_valid;
  assign dma_src     = c_dma_valid ? c_dma_src : h_dma_src;
  assign dma_dst     = c_dma_valid ? c_dma_dst : h_dma_dst;
  assign dma_len     = c_dma_valid ? c_dma_len : h_dma_len;
  assign c_dma_ready = dma_ready;
  assign h_dma_ready = dma_ready && !c_dma_valid;

  // ------------------------------------------------------------ buffer port decode
  space_e      bsp;
  logic [27:0] bidx;
  logic        ob_dma_ready, vm_dma_ready;
  assign bsp  = space_e'(buf_req_addr[31:28]);
  assign bidx = buf_req_addr[27:0];

  always_comb begin
    unique case (bsp)
      SP_OBUF: buf_req_ready = ob_dma_ready;
      SP_VMEM: buf_req_ready = vm_dma_ready;
      default: buf_req_ready = 1'b1;
    endcase
  end

  logic   acc_fire;
  logic   rsp_pend;
  space_e rsp_sp;
  assign acc_fire = buf_req_valid && buf_req_ready;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp_pend <= 1'b0;
      rsp_sp   <= SP_IBUF;
    end else begin
      rsp_pend <= acc_fire && !buf_req_we;
      if (acc_fire) rsp_sp <= bsp;
    end
  end

  logic [BUS_W-1:0] ob_dma_data, vm_dma_data;
  assign buf_rsp_valid = rsp_pend;
  assign buf_rsp_rdata = (rsp_sp == SP_OBUF) ? ob_dma_data :
                         (rsp_sp == SP_VMEM) ? vm_dma_data : '0;

  // ------------------------------------------------------------ input buffer + MPU
  logic [ROWS-1:0] ib_rd_en;
  logic [IAW-1:0]  ib_rd_addr [ROWS];
  logic [7:0]      ib_rd_data [ROWS];
  logic [COLS-1:0] col_vld;
  logic [31:0]     col_psum [COLS];
  localparam int unsigned RGW = $clog2(NGRP + 1);

  input_buffer #(.ROWS(ROWS), .DEPTH(IB_DEPTH), .BUS_W(BUS_W)) u_ibuf (
    .clk,
    .wr_en   (acc_fire && buf_req_we && bsp == SP_IBUF),
    .wr_beat (IBW'(bidx)),
    .wr_data (buf_req_wdata),
    .rd_en   (ib_rd_en),
    .rd_addr (ib_rd_addr),
    .rd_data (ib_rd_data)
  );

  mpu #(.ROWS(ROWS), .COLS(COLS), .IB_DEPTH(IB_DEPTH), .WB_DEPTH(WB_DEPTH), .BUS_W(BUS_W)) u_mpu (
    .clk, .rst_n,
    .start     (mpu_start),
    .ibuf_base (IAW'(mpu_ibase)),
    .nvec      (mpu_nvec),
    .slot      (SW'(mpu_slot)),
    .busy      (mpu_busy),
    .ib_rd_en, .ib_rd_addr, .ib_rd_data,
    .wb_we     (acc_fire && buf_req_we && bsp == SP_WBUF),
    .wb_slot   (SW'(32'(bidx) / (NGRP * ROWS))),
    .wb_row    ($clog2(ROWS)'((32'(bidx) / NGRP) % ROWS)),
    .wb_grp    (RGW'(32'(bidx) % NGRP)),
    .wb_wdata  (buf_req_wdata),
    .col_vld, .col_psum
  );

  // ------------------------------------------------------------ output buffer + VPU
  logic           ob_rd_en;
  logic [OAW-1:0] ob_rd_addr [COLS];
  logic [31:0]    ob_rd_data [COLS];

  output_buffer #(.COLS(COLS), .DEPTH(OB_DEPTH), .BUS_W(BUS_W)) u_obuf (
    .clk, .rst_n,
    .tile_start (mpu_start),
    .tile_base  (OAW'(mpu_obase)),
    .tile_acc   (mpu_acc),
    .col_vld, .col_psum,
    .rd_en      (ob_rd_en),
    .rd_addr    (ob_rd_addr),
    .rd_data    (ob_rd_data),
    .dma_rd     (buf_req_valid && !buf_req_we && bsp == SP_OBUF),
    .dma_beat   ((OAW+VGW)'(bidx)),
    .dma_ready  (ob_dma_ready),
    .dma_data   (ob_dma_data),
    .acc_count  (obuf_acc_count)
  );

  vpu #(.COLS(COLS), .VM_DEPTH(VM_DEPTH), .OB_DEPTH(OB_DEPTH), .BUS_W(BUS_W)) u_vpu (
    .clk, .rst_n,
    .start  (vpu_start), .op(vpu_op), .a_base(vpu_a), .b_base(vpu_b), .d_base(vpu_d),
    .len    (vpu_len), .imm(vpu_imm), .flags(vpu_flags), .busy(vpu_busy),
    .ob_rd_en, .ob_rd_addr, .ob_rd_data,
    .dma_we    (buf_req_valid && buf_req_we && bsp == SP_VMEM),
    .dma_rd    (buf_req_valid && !buf_req_we && bsp == SP_VMEM),
    .dma_beat  ((VAW+VGW)'(bidx)),
    .dma_wdata (buf_req_wdata),
    .dma_ready (vm_dma_ready),
    .dma_rdata (vm_dma_data)
  );
endmodule
