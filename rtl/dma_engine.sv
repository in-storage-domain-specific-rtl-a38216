// dma_engine: the drive's DMA engine, moving data between the flash array, the drive DRAM and
// the accelerator's on-chip buffers.
//
// A command names a source and a destination beat address (bits [31:28] pick the space, see
// dscs_pkg::space_e) and a length in bus beats. The flash, DRAM and accelerator each sit on one
// of three request ports. Reads are issued on the source port while fewer than FIFO_DEPTH beats
// are in flight or buffered; read data returns in order into a FIFO, and the FIFO is drained
// as writes on the destination port, so transfers stream at one beat per cycle when neither
// side stalls. Flash-to-DRAM is the peer-to-peer path that bypasses the host; DRAM-to-buffer
// loads tiles for the accelerator. The published drive has a DMA engine that moves data
// between host interface, flash, DRAM and accelerator; the command format, the port protocol
// and the FIFO are this design's choices.
//
// Port protocol (each port): req_valid/req_ready handshake, req_we selects write; reads return
// rsp_valid with rsp_rdata, in request order, any number of cycles later.
// `done` pulses for one cycle when the last beat of a command has been written.
module dma_engine
  import dscs_pkg::*;
#(
  parameter int unsigned BUS_W      = dscs_pkg::DEF_BUS_W,
  parameter int unsigned FIFO_DEPTH = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  logic [31:0]       cmd_src,
  input  logic [31:0]       cmd_dst,
  input  logic [15:0]       cmd_len,
  output logic              busy,
  output logic              done,
  output logic [2:0]        req_valid,
  input  logic [2:0]        req_ready,
  output logic [2:0]        req_we,
  output logic [31:0]       req_addr  [3],
  output logic [BUS_W-1:0]  req_wdata [3],
  input  logic [2:0]        rsp_valid,
  input  logic [BUS_W-1:0]  rsp_rdata [3]
);
  localparam int unsigned FW = $clog2(FIFO_DEPTH);

  logic [31:0] src_q, dst_q;
  logic [15:0] len_q, rd_cnt, wr_cnt;
  dma_port_e   sp, dp;
  logic [FW:0] occ;        // beats read-issued but not yet written

  logic [BUS_W-1:0] fifo [FIFO_DEPTH];
  logic [FW-1:0]    wp, rp;
  logic [FW:0]      cnt;

  assign cmd_ready = !busy;
  assign sp = port_of(src_q[31:28]);
  assign dp = port_of(dst_q[31:28]);

  logic want_wr, want_rd, rd_fire, wr_fire;
  assign want_wr = busy && (cnt != 0);
  assign want_rd = busy && (rd_cnt != len_q) && (occ < (FW+1)'(FIFO_DEPTH));

  always_comb begin
    for (int p = 0; p < 3; p++) begin
      req_valid[p] = 1'b0;
      req_we[p]    = 1'b0;
      req_addr[p]  = '0;
      req_wdata[p] = fifo[rp];
      if (want_wr && dp == dma_port_e'(p)) begin
        req_valid[p] = 1'b1;
        req_we[p]    = 1'b1;
        req_addr[p]  = dst_q + 32'(wr_cnt);
      end else if (want_rd && sp == dma_port_e'(p)) begin
        req_valid[p] = 1'b1;
        req_addr[p]  = src_q + 32'(rd_cnt);
      end
    end
  end

  assign wr_fire = want_wr && req_ready[dp];
  assign rd_fire = req_valid[sp] && !req_we[sp] && req_ready[sp];

  logic push;
  assign push = busy && rsp_valid[sp];

  always_ff @(posedge clk) if (push) fifo[wp] <= rsp_rdata[sp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; src_q <= '0; dst_q <= '0; len_q <= '0;
      rd_cnt <= '0; wr_cnt <= '0; occ <= '0; wp <= '0; rp <= '0; cnt <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (cmd_valid && cmd_len != 0) begin
          busy <= 1'b1; src_q <= cmd_src; dst_q <= cmd_dst; len_q <= cmd_len;
          rd_cnt <= '0; wr_cnt <= '0; occ <= '0; wp <= '0; rp <= '0; cnt <= '0;
        end
      end else begin
        if (rd_fire) rd_cnt <= rd_cnt + 1'b1;
        if (push)    wp <= wp + 1'b1;
        if (wr_fire) begin
          rp     <= rp + 1'b1;
          wr_cnt <= wr_cnt + 1'b1;
          if (wr_cnt == len_q - 1'b1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
        occ <= occ + (FW+1)'(rd_fire) - (FW+1)'(wr_fire);
        cnt <= cnt + (FW+1)'(push)    - (FW+1)'(wr_fire);
      end
    end
  end

  // read data never arrives for a beat that was not requested
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) cnt <= (FW+1)'(FIFO_DEPTH));
endmodule
