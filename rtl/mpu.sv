// mpu: the Matrix Processing Unit, a ROWS x COLS weight-stationary systolic array.
//
// Every PE has its own weight buffer (WB). A GEMM tile multiplies NVEC input vectors of ROWS
// int8 activations by the ROWS x COLS int8 weight tile held in WB slot `slot`:
//     y[t][c] = sum_r x[t][r] * W[r][c]
// Row r takes its activations from input-buffer bank r (one bank per row, shared by the PEs of
// that row); activations move right one PE per cycle and partial sums move down one PE per
// cycle, and the bottom of column c delivers y[t][c] to output-buffer bank c. The published
// design gives this organisation (banked input buffer per row, activation forwarding to the
// right, partial-sum "waterfall" down each column, per-PE WB). The skew is produced here by
// giving each row its own read address, row r reading vector t at cycle t + r, instead of
// delay registers; that, the valid bits and the WB write layout are this design's choices.
//
// Interface: `start` with ibuf_base (byte offset inside every bank), nvec (>= 1) and slot
// begins a tile; `busy` stays high until the last column has delivered its last result.
// A tile takes nvec + ROWS + COLS + 2 cycles from start to busy falling; tiles do not overlap.
// WB loading: one bus beat carries BUS_W/8 weights for row wb_row, columns
// wb_grp*(BUS_W/8) ... +BUS_W/8-1, written into slot wb_slot of those PEs.
module mpu #(
  parameter int unsigned ROWS     = dscs_pkg::DEF_ROWS,
  parameter int unsigned COLS     = dscs_pkg::DEF_COLS,
  parameter int unsigned IB_DEPTH = dscs_pkg::DEF_IB_DEPTH,
  parameter int unsigned WB_DEPTH = dscs_pkg::DEF_WB_DEPTH,
  parameter int unsigned BUS_W    = dscs_pkg::DEF_BUS_W,
  localparam int unsigned BB      = BUS_W / 8,
  localparam int unsigned NGRP    = (COLS + BB - 1) / BB,
  localparam int unsigned IAW     = $clog2(IB_DEPTH),
  localparam int unsigned SW      = $clog2(WB_DEPTH)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // tile command
  input  logic                    start,
  input  logic [IAW-1:0]          ibuf_base,
  input  logic [15:0]             nvec,
  input  logic [SW-1:0]           slot,
  output logic                    busy,
  // input buffer read ports, one per row; data returns one cycle later
  output logic [ROWS-1:0]         ib_rd_en,
  output logic [IAW-1:0]          ib_rd_addr [ROWS],
  input  logic [7:0]              ib_rd_data [ROWS],
  // weight-buffer load port
  input  logic                    wb_we,
  input  logic [SW-1:0]           wb_slot,
  input  logic [$clog2(ROWS)-1:0] wb_row,
  input  logic [$clog2(NGRP+1)-1:0] wb_grp,
  input  logic [BUS_W-1:0]        wb_wdata,
  // results, one per column, to the output buffer
  output logic [COLS-1:0]         col_vld,
  output logic [31:0]             col_psum [COLS]
);
  // ------------------------------------------------------------ sequencer
  logic        running;
  logic [17:0] cyc;
  logic [15:0] nv_q;
  logic [SW-1:0] slot_q;
  logic [IAW-1:0] base_q;
  logic [15:0] last_cnt;     // results delivered by the last column

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running  <= 1'b0;
      cyc      <= '0;
      nv_q     <= '0;
      slot_q   <= '0;
      base_q   <= '0;
      last_cnt <= '0;
    end else if (start && !busy) begin
      running  <= 1'b1;
      cyc      <= '0;
      nv_q     <= nvec;
      slot_q   <= slot;
      base_q   <= ibuf_base;
      last_cnt <= '0;
    end else begin
      if (running) begin
        cyc <= cyc + 1'b1;
        if (cyc == 18'(nv_q) + 18'(ROWS) - 18'd1) running <= 1'b0;
      end
      if (col_vld[COLS-1]) last_cnt <= last_cnt + 1'b1;
    end
  end

  assign busy = running || (last_cnt != nv_q);

  // Row r reads vector (cyc - r) while 0 <= cyc - r < nvec.
  for (genvar r = 0; r < ROWS; r++) begin : g_rd
    logic [17:0] idx;
    assign idx           = cyc - 18'(r);
    assign ib_rd_en[r]   = running && (idx < 18'(nv_q));  // idx wraps high while cyc < r
    assign ib_rd_addr[r] = base_q + IAW'(idx);
  end

  logic [ROWS-1:0] rd_vld_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_vld_q <= '0;
    else        rd_vld_q <= ib_rd_en;
  end

  // ------------------------------------------------------------ PE array
  logic signed [7:0]  act  [ROWS][COLS+1];
  logic               avld [ROWS][COLS+1];
  logic signed [31:0] ps   [ROWS+1][COLS];
  logic               pvld [ROWS+1][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    assign act[r][0]  = ib_rd_data[r];
    assign avld[r][0] = rd_vld_q[r];
    for (genvar c = 0; c < COLS; c++) begin : g_col
      logic [7:0] w;
      logic       we;
      assign we = wb_we && (wb_row == r[$clog2(ROWS)-1:0]) && (32'(wb_grp) == c / BB);
      weight_buffer #(.DEPTH(WB_DEPTH)) u_wb (
        .clk   (clk),
        .we    (we),
        .waddr (wb_slot),
        .wdata (wb_wdata[(c % BB)*8 +: 8]),
        .raddr (slot_q),
        .rdata (w)
      );
      pe u_pe (
        .clk          (clk),
        .rst_n        (rst_n),
        .act_in       (act[r][c]),
        .act_vld_in   (avld[r][c]),
        .w            (w),
        .psum_in      (ps[r][c]),
        .act_out      (act[r][c+1]),
        .act_vld_out  (avld[r][c+1]),
        .psum_out     (ps[r+1][c]),
        .psum_vld_out (pvld[r+1][c])
      );
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_out
    assign ps[0][c]   = '0;
    assign pvld[0][c] = 1'b0;
    assign col_vld[c]  = pvld[ROWS][c];
    assign col_psum[c] = ps[ROWS][c];
  end
endmodule
