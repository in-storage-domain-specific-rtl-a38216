// output_buffer: the multi-bank output buffer shared by the MPU and the VPU.
//
// One bank of DEPTH 32-bit words per PE column. Each bank has an adder in front of it: when a
// GEMM tile runs with `acc` set, a result arriving from column c is added to the word already at
// its address (partial sums of successive reduction tiles accumulate here); otherwise it
// overwrites it. Results of column c land at base, base+1, ... in arrival order, so the array's
// column skew needs no correction. The VPU reads the same banks directly, one word per lane per
// cycle, which is how MPU results reach the VPU without a trip through DRAM. The per-column
// banks with an adder and the shared MPU/VPU connection are in the published design; depth
// (2048 words, 1 MB in all), per-bank write pointers and the DMA beat layout are this
// design's choices.
//
// Ports: tile_start loads every bank's write pointer with tile_base and latches tile_acc.
// VPU read: rd_en, per-lane rd_addr, data one cycle later. DMA read: beat address
// = word * (COLS/LPB) + lane group, LPB = BUS_W/32 lanes per beat, data one cycle later.
// The VPU read has priority; dma_ready is low on a cycle the VPU reads.
module output_buffer #(
  parameter int unsigned COLS  = dscs_pkg::DEF_COLS,
  parameter int unsigned DEPTH = dscs_pkg::DEF_OB_DEPTH,
  parameter int unsigned BUS_W = dscs_pkg::DEF_BUS_W,
  localparam int unsigned LPB   = BUS_W / 32,
  localparam int unsigned NGRP  = (COLS + LPB - 1) / LPB,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned GW    = (NGRP > 1) ? $clog2(NGRP) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // from the MPU
  input  logic              tile_start,
  input  logic [AW-1:0]     tile_base,
  input  logic              tile_acc,
  input  logic [COLS-1:0]   col_vld,
  input  logic [31:0]       col_psum [COLS],
  // VPU read port
  input  logic              rd_en,
  input  logic [AW-1:0]     rd_addr [COLS],
  output logic [31:0]       rd_data [COLS],
  // DMA read port
  input  logic              dma_rd,
  input  logic [AW+GW-1:0]  dma_beat,
  output logic              dma_ready,
  output logic [BUS_W-1:0]  dma_data,
  // number of accumulate updates performed (observability)
  output logic [31:0]       acc_count
);
  logic acc_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc_q <= 1'b0;
    else if (tile_start) acc_q <= tile_acc;
  end

  assign dma_ready = !rd_en;
  logic            dma_go;
  logic [GW-1:0]   dma_grp_q;
  assign dma_go = dma_rd && !rd_en;
  always_ff @(posedge clk) if (dma_go) dma_grp_q <= dma_beat[GW-1:0];

  logic [31:0] word_q [COLS];
  logic [COLS-1:0] acc_hit;

  for (genvar c = 0; c < COLS; c++) begin : g_bank
    logic [31:0]   mem [DEPTH];
    logic [AW-1:0] wp;
    logic [AW-1:0] ra;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)            wp <= '0;
      else if (tile_start)   wp <= tile_base;
      else if (col_vld[c])   wp <= wp + 1'b1;
    end
    always_ff @(posedge clk) begin
      if (col_vld[c]) mem[wp] <= acc_q ? mem[wp] + col_psum[c] : col_psum[c];
    end
    assign acc_hit[c] = col_vld[c] && acc_q;
    assign ra = rd_en ? rd_addr[c] : dma_beat[AW+GW-1:GW];
    always_ff @(posedge clk) if (rd_en || dma_go) word_q[c] <= mem[ra];
    assign rd_data[c] = word_q[c];
  end

  always_comb begin
    dma_data = '0;
    for (int l = 0; l < LPB; l++)
      if (32'(dma_grp_q) * LPB + l < COLS) dma_data[l*32 +: 32] = word_q[32'(dma_grp_q) * LPB + l];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc_count <= '0;
    else        acc_count <= acc_count + 32'($countones(acc_hit));
  end
endmodule
