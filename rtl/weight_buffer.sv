// weight_buffer: the private weight buffer (WB) that sits above each PE.
//
// A small single-write, single-read memory of DEPTH 8-bit weights. The DMA path writes one
// weight per cycle; the PE reads the slot chosen for the current GEMM tile, and the registered
// read data is the PE's weight input. Holding several slots lets the next tile's weights be
// loaded while the current tile computes. The per-PE buffer is shown in the published
// figure; its depth (64, which with 128x128 PEs is 1 MB of the 4 MB on-chip storage) and the
// one-cycle registered read are this design's choices.
module weight_buffer #(
  parameter int unsigned DEPTH = 64
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [7:0]               wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [7:0]               rdata
);
  logic [7:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
