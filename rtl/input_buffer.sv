// input_buffer: the multi-bank input-activation buffer of the Matrix Processing Unit.
//
// One bank per PE row; bank r feeds every PE of row r. Each bank holds DEPTH bytes organised
// as lines of one bus beat (BUS_W/8 bytes), so the DMA path fills a whole line per cycle while
// the array reads one byte per bank per cycle. Banking by row follows the published design;
// the depth (8 KB per bank, 1 MB in all), the line organisation and the beat address layout are
// this design's choices.
//
// Write port (DMA): beat address = bank * (DEPTH/BB) + line, BB = BUS_W/8 bytes per beat.
// Read ports: rd_en/rd_addr per bank (byte address); rd_data is registered, one cycle later.
module input_buffer #(
  parameter int unsigned ROWS  = dscs_pkg::DEF_ROWS,
  parameter int unsigned DEPTH = dscs_pkg::DEF_IB_DEPTH,
  parameter int unsigned BUS_W = dscs_pkg::DEF_BUS_W,
  localparam int unsigned BB    = BUS_W / 8,
  localparam int unsigned LINES = DEPTH / BB,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned LW    = $clog2(LINES)
) (
  input  logic                        clk,
  input  logic                        wr_en,
  input  logic [$clog2(ROWS)+LW-1:0]  wr_beat,
  input  logic [BUS_W-1:0]            wr_data,
  input  logic [ROWS-1:0]             rd_en,
  input  logic [AW-1:0]               rd_addr [ROWS],
  output logic [7:0]                  rd_data [ROWS]
);
  for (genvar r = 0; r < ROWS; r++) begin : g_bank
    logic [BUS_W-1:0] mem [LINES];
    logic             we;
    logic [BUS_W-1:0] line;
    assign we = wr_en && (wr_beat[$clog2(ROWS)+LW-1:LW] == r[$clog2(ROWS)-1:0]);
    always_ff @(posedge clk) begin
      if (we) mem[wr_beat[LW-1:0]] <= wr_data;
      if (rd_en[r]) line <= mem[rd_addr[r][AW-1:$clog2(BB)]];
    end
    // byte select uses the address registered with the line
    logic [$clog2(BB)-1:0] sel;
    always_ff @(posedge clk) if (rd_en[r]) sel <= rd_addr[r][$clog2(BB)-1:0];
    assign rd_data[r] = line[sel*8 +: 8];
  end
endmodule
