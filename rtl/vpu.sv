// vpu: the Vector Processing Unit, a SIMD array of COLS vector engines (VEs), one per MPU column.
//
// Lane j owns bank j of the VPU's local memory (VM_DEPTH 32-bit words) and reads bank j of the
// shared output buffer, so MPU results feed the VPU without passing through DRAM. One vector
// instruction applies the same operation to `len` elements in every lane; element i of lane j
// uses
//     a: lane bank or output buffer at  a_base + (A_STRIDE ? i : 0)
//     b: lane bank                  at  b_base + (B_STRIDE ? i : 0)
//     d: lane bank                  at  d_base + (D_STRIDE ? i : 0)
// The load/store unit of each lane is this address generation. The transpose unit is a lane
// rotation network: for V_TRN, lane j reads a at a_base + ((j - i) mod COLS), receives the
// value read by lane (j + i) mod COLS and writes it at d_base + ((j + i) mod COLS). Over
// len = COLS elements this transposes a COLS x COLS block stored one column per lane
// (element [r][c] in lane c at base + r). The SIMD organisation, the per-lane banks, the
// shared output buffer and the unit list are the published design; the addressing, the
// rotation-based transpose and the 3-stage pipeline are this design's choices.
//
// Pipeline: stage 0 issues the reads for element i, stage 1 computes in the VEs (output
// register), stage 2 writes the lane bank. One element per lane per cycle; an instruction of
// len elements keeps `busy` high for len + 2 cycles after the cycle that accepts `start`.
// The DMA port reaches the lane banks only while the VPU is idle (dma_ready low when busy).
// DMA beat layout: beat = word * NGRP + lane group, LPB = BUS_W/32 lanes per beat.
module vpu
  import dscs_pkg::*;
#(
  parameter int unsigned COLS     = dscs_pkg::DEF_COLS,
  parameter int unsigned VM_DEPTH = dscs_pkg::DEF_VM_DEPTH,
  parameter int unsigned OB_DEPTH = dscs_pkg::DEF_OB_DEPTH,
  parameter int unsigned BUS_W    = dscs_pkg::DEF_BUS_W,
  localparam int unsigned LPB   = BUS_W / 32,
  localparam int unsigned NGRP  = (COLS + LPB - 1) / LPB,
  localparam int unsigned GW    = (NGRP > 1) ? $clog2(NGRP) : 1,
  localparam int unsigned VAW   = $clog2(VM_DEPTH),
  localparam int unsigned OAW   = $clog2(OB_DEPTH),
  localparam int unsigned LW    = $clog2(COLS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // instruction
  input  logic              start,
  input  vop_e              op,
  input  logic [15:0]       a_base,
  input  logic [15:0]       b_base,
  input  logic [15:0]       d_base,
  input  logic [15:0]       len,
  input  logic [15:0]       imm,
  input  logic [5:0]        flags,
  output logic              busy,
  // output-buffer read port
  output logic              ob_rd_en,
  output logic [OAW-1:0]    ob_rd_addr [COLS],
  input  logic [31:0]       ob_rd_data [COLS],
  // DMA access to the lane banks
  input  logic              dma_we,
  input  logic              dma_rd,
  input  logic [VAW+GW-1:0] dma_beat,
  input  logic [BUS_W-1:0]  dma_wdata,
  output logic              dma_ready,
  output logic [BUS_W-1:0]  dma_rdata
);
  // ------------------------------------------------------------ instruction registers
  logic        running;
  logic [15:0] i, len_q, a_q, b_q, d_q, imm_q;
  logic [5:0]  fl_q;
  vop_e        op_q;
  logic        s1_vld, s1_first;
  logic [15:0] s1_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; i <= '0; len_q <= '0; a_q <= '0; b_q <= '0; d_q <= '0;
      imm_q <= '0; fl_q <= '0; op_q <= V_MOV;
      s1_vld <= 1'b0; s1_first <= 1'b0; s1_i <= '0;
    end else begin
      if (start && !busy && len != 0) begin
        running <= 1'b1; i <= '0; len_q <= len; a_q <= a_base; b_q <= b_base; d_q <= d_base;
        imm_q <= imm; fl_q <= flags; op_q <= op;
      end else if (running) begin
        i <= i + 1'b1;
        if (i == len_q - 1'b1) running <= 1'b0;
      end
      s1_vld   <= running;
      s1_first <= running && (i == 0);
      s1_i     <= i;
    end
  end

  logic [COLS-1:0] y_vld;
  assign busy      = running || s1_vld || y_vld[0];
  assign dma_ready = !busy;

  logic trn;
  assign trn = (op_q == V_TRN);

  // ------------------------------------------------------------ lanes
  logic [31:0] ra     [COLS];   // operand a as read (stage 1)
  logic [31:0] ram_q  [COLS];   // lane-bank read data, operand a or DMA
  logic [31:0] rb     [COLS];
  logic [31:0] opa    [COLS];
  logic [31:0] y      [COLS];
  logic [VAW-1:0] wa  [COLS];   // stage-2 write address
  logic [GW-1:0]  dgrp_q;

  assign ob_rd_en = running && fl_q[VF_A_OBUF];

  for (genvar j = 0; j < COLS; j++) begin : g_lane
    logic [31:0]    mem [VM_DEPTH];
    logic [15:0]    aa, ba, da;
    logic [LW-1:0]  jj;
    logic           dma_hit;
    assign jj = LW'(j);
    // load/store unit: address generation
    assign aa = trn ? a_q + 16'(LW'(jj - LW'(i)))        : a_q + (fl_q[VF_A_STRIDE] ? i : 16'd0);
    assign ba = b_q + (fl_q[VF_B_STRIDE] ? i : 16'd0);
    assign da = trn ? d_q + 16'(LW'(jj + LW'(s1_i)))     : d_q + (fl_q[VF_D_STRIDE] ? s1_i : 16'd0);
    assign ob_rd_addr[j] = OAW'(aa);
    assign dma_hit = (32'(dma_beat[GW-1:0]) == j / LPB);

    always_ff @(posedge clk) begin
      if (running) begin
        ram_q[j] <= mem[VAW'(aa)];
        rb[j]  <= mem[VAW'(ba)];
      end else if (dma_rd && !busy && dma_hit) begin
        ram_q[j] <= mem[dma_beat[VAW+GW-1:GW]];
      end
      if (s1_vld) wa[j] <= VAW'(da);
      if (y_vld[j])
        mem[wa[j]] <= y[j];
      else if (dma_we && !busy && dma_hit)
        mem[dma_beat[VAW+GW-1:GW]] <= dma_wdata[(j % LPB)*32 +: 32];
    end
    assign ra[j] = fl_q[VF_A_OBUF] ? ob_rd_data[j] : ram_q[j];

    // transpose unit: rotation by the element index
    assign opa[j] = trn ? ra[LW'(jj + LW'(s1_i))] : ra[j];

    vector_engine u_ve (
      .clk   (clk),
      .rst_n (rst_n),
      .en    (s1_vld),
      .op    (op_q),
      .first (s1_first),
      .a     (opa[j]),
      .b     (rb[j]),
      .imm   (imm_q),
      .y     (y[j]),
      .y_vld (y_vld[j])
    );
  end

  // DMA read data: the lane group's words, one cycle after the request
  always_ff @(posedge clk) if (dma_rd && !busy) dgrp_q <= dma_beat[GW-1:0];
  always_comb begin
    dma_rdata = '0;
    for (int l = 0; l < LPB; l++)
      if (32'(dgrp_q) * LPB + l < COLS) dma_rdata[l*32 +: 32] = ram_q[32'(dgrp_q) * LPB + l];
  end
endmodule
