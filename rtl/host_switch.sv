// host_switch: the request switch of the computational storage drive.
//
// Host traffic and accelerator traffic share the drive's PCIe link. Requests whose address has
// bit 31 set go to the accelerator's registers; all others are ordinary storage traffic and go
// to the flash side, which is how the drive keeps serving normal reads and writes with the
// accelerator bypassed. The flash side is also the target of the DMA engine's peer-to-peer
// port, so the switch arbitrates the flash port between host and DMA (alternating on
// conflict) and returns each flash read response to the requester it belongs to, using a FIFO
// of requester tags (flash responses arrive in order). The published drive routes host
// requests to the flash device or the accelerator by request type and has a dedicated P2P path
// between flash and accelerator; the address-bit routing, the round-robin arbiter and the
// single outstanding host read are this design's choices.
//
// All ports use the valid/ready request, in-order response protocol of dma_engine.
module host_switch
  import dscs_pkg::*;
#(
  parameter int unsigned BUS_W     = dscs_pkg::DEF_BUS_W,
  parameter int unsigned TAG_DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  // host (from the PCIe/NVMe interface)
  input  logic             h_req_valid,
  output logic             h_req_ready,
  input  logic             h_req_we,
  input  logic [31:0]      h_req_addr,
  input  logic [BUS_W-1:0] h_req_wdata,
  output logic             h_rsp_valid,
  output logic [BUS_W-1:0] h_rsp_rdata,
  // DMA engine, flash port
  input  logic             d_req_valid,
  output logic             d_req_ready,
  input  logic             d_req_we,
  input  logic [31:0]      d_req_addr,
  input  logic [BUS_W-1:0] d_req_wdata,
  output logic             d_rsp_valid,
  output logic [BUS_W-1:0] d_rsp_rdata,
  // flash side (SSD controller)
  output logic             f_req_valid,
  input  logic             f_req_ready,
  output logic             f_req_we,
  output logic [31:0]      f_req_addr,
  output logic [BUS_W-1:0] f_req_wdata,
  input  logic             f_rsp_valid,
  input  logic [BUS_W-1:0] f_rsp_rdata,
  // accelerator registers
  output logic             c_req_valid,
  output logic             c_req_we,
  output logic [31:0]      c_req_addr,
  output logic [BUS_W-1:0] c_req_wdata,
  input  logic             c_rsp_valid,
  input  logic [BUS_W-1:0] c_rsp_rdata,
  // number of times the flash port was contended (observability)
  output logic [31:0]      conflicts
);
  localparam int unsigned TW = $clog2(TAG_DEPTH);

  logic h_to_dsa, h_fl_req, host_rd_pend, last_dma, grant_h, grant_d;
  logic tag [TAG_DEPTH];            // 1 = response belongs to the host
  logic [TW-1:0] tw, tr;
  logic [TW:0]   tcnt;
  logic tag_full;

  assign h_to_dsa = h_req_addr[HOST_DSA_BIT];
  assign tag_full = (tcnt == (TW+1)'(TAG_DEPTH));
  assign h_fl_req = h_req_valid && !h_to_dsa && !host_rd_pend;

  // round-robin between host and DMA for the flash port
  always_comb begin
    grant_h = 1'b0;
    grant_d = 1'b0;
    if (h_fl_req && d_req_valid) begin
      if (last_dma) grant_h = 1'b1; else grant_d = 1'b1;
    end else if (h_fl_req) grant_h = 1'b1;
    else if (d_req_valid)  grant_d = 1'b1;
  end

  assign f_req_valid = (grant_h || grant_d) && !tag_full;
  assign f_req_we    = grant_h ? h_req_we    : d_req_we;
  assign f_req_addr  = grant_h ? h_req_addr  : d_req_addr;
  assign f_req_wdata = grant_h ? h_req_wdata : d_req_wdata;
  assign d_req_ready = grant_d && f_req_ready && !tag_full;

  assign c_req_valid = h_req_valid && h_to_dsa && !host_rd_pend;
  assign c_req_we    = h_req_we;
  assign c_req_addr  = h_req_addr;
  assign c_req_wdata = h_req_wdata;

  assign h_req_ready = !host_rd_pend && (h_to_dsa || (grant_h && f_req_ready && !tag_full));

  logic f_fire, f_rd_fire, h_rd_fire;
  assign f_fire    = f_req_valid && f_req_ready;
  assign f_rd_fire = f_fire && !f_req_we;
  assign h_rd_fire = h_req_valid && h_req_ready && !h_req_we;

  // responses
  assign d_rsp_valid = f_rsp_valid && !tag[tr];
  assign d_rsp_rdata = f_rsp_rdata;
  assign h_rsp_valid = c_rsp_valid || (f_rsp_valid && tag[tr]);
  assign h_rsp_rdata = c_rsp_valid ? c_rsp_rdata : f_rsp_rdata;

  always_ff @(posedge clk) if (f_rd_fire) tag[tw] <= grant_h;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tw <= '0; tr <= '0; tcnt <= '0; last_dma <= 1'b0; host_rd_pend <= 1'b0; conflicts <= '0;
    end else begin
      if (f_rd_fire)   tw <= tw + 1'b1;
      if (f_rsp_valid) tr <= tr + 1'b1;
      tcnt <= tcnt + (TW+1)'(f_rd_fire) - (TW+1)'(f_rsp_valid);
      if (f_fire) last_dma <= grant_d;
      if (h_fl_req && d_req_valid && f_fire) conflicts <= conflicts + 1'b1;
      if (h_rd_fire)        host_rd_pend <= 1'b1;
      else if (h_rsp_valid) host_rd_pend <= 1'b0;
    end
  end

  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n) f_rsp_valid |-> tcnt != 0);
endmodule
