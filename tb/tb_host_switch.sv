// tb_host_switch: host and DMA traffic share the flash port. The host issues random reads and
// writes to flash and to the accelerator registers (modelled here) while the DMA side streams
// reads and writes; every response must reach the requester that issued it with the right
// data, and contention must have occurred (arbitration exercised).
module tb_host_switch;
  localparam int BW = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic h_req_valid, h_req_ready, h_req_we, h_rsp_valid, d_req_valid, d_req_ready, d_req_we, d_rsp_valid;
  logic f_req_valid, f_req_ready, f_req_we, f_rsp_valid, c_req_valid, c_req_we, c_rsp_valid;
  logic [31:0] h_req_addr, d_req_addr, f_req_addr, c_req_addr, conflicts;
  logic [BW-1:0] h_req_wdata, h_rsp_rdata, d_req_wdata, d_rsp_rdata, f_req_wdata, f_rsp_rdata, c_req_wdata, c_rsp_rdata;

  host_switch #(.BUS_W(BW)) dut (.*);
  mem_model #(.BUS_W(BW), .DEPTH(256), .LAT(5), .STALL(30)) u_flash (.clk, .req_valid(f_req_valid), .req_ready(f_req_ready),
    .req_we(f_req_we), .req_addr(f_req_addr), .req_wdata(f_req_wdata), .rsp_valid(f_rsp_valid), .rsp_rdata(f_rsp_rdata));

  // accelerator register model: read returns the address plus a constant, next cycle
  always_ff @(posedge clk) begin
    c_rsp_valid <= c_req_valid && !c_req_we;
    c_rsp_rdata <= BW'(c_req_addr) + 64'h5000;
  end

  logic [BW-1:0] shadow [256];
  logic [BW-1:0] d_exp [$];
  logic [BW-1:0] h_exp [$];

  initial begin : watchdog
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // DMA side: reads only from the upper half, writes only the lower half
  int d_done = 0;
  always @(posedge clk) if (rst_n) begin
    if (d_rsp_valid) begin
      checks++;
      if (d_exp.size() == 0 || d_rsp_rdata !== d_exp[0]) begin failures++; $display("DMA response wrong"); end
      if (d_exp.size() != 0) void'(d_exp.pop_front());
    end
    if (h_rsp_valid) begin
      checks++;
      if (h_exp.size() == 0 || h_rsp_rdata !== h_exp[0]) begin failures++; $display("host response wrong"); end
      if (h_exp.size() != 0) void'(h_exp.pop_front());
    end
    if (d_req_valid && d_req_ready) begin
      if (!d_req_we) d_exp.push_back(shadow[d_req_addr[7:0]]);
      else shadow[d_req_addr[7:0]] = d_req_wdata;
      d_done++;
    end
    if (h_req_valid && h_req_ready) begin
      if (h_req_addr[31]) begin if (!h_req_we) h_exp.push_back(BW'(h_req_addr) + 64'h5000); end
      else if (!h_req_we) h_exp.push_back(shadow[h_req_addr[7:0]]);
      else shadow[h_req_addr[7:0]] = h_req_wdata;
    end
  end

  always @(negedge clk) if (rst_n) begin
    if (!d_req_valid || d_req_ready_q) begin
      d_req_valid = (d_done < 600) && ($urandom_range(0, 3) != 0);
      d_req_we = $urandom_range(0, 1);
      d_req_addr = d_req_we ? 32'($urandom_range(0, 63)) : 32'($urandom_range(128, 255));
      d_req_wdata = {$urandom, $urandom};
    end
    if (!h_req_valid || h_req_ready_q) begin
      h_req_valid = $urandom_range(0, 1);
      h_req_we = $urandom_range(0, 1);
      h_req_addr = $urandom_range(0, 3) == 0 ? (32'h8000_0000 | 32'($urandom_range(0, 15))) : 32'($urandom_range(64, 127));
      h_req_wdata = {$urandom, $urandom};
    end
  end
  logic d_req_ready_q, h_req_ready_q;
  always @(posedge clk) begin d_req_ready_q <= d_req_valid && d_req_ready; h_req_ready_q <= h_req_valid && h_req_ready; end

  initial begin
    h_req_valid = 0; h_req_we = 0; h_req_addr = 0; h_req_wdata = 0;
    d_req_valid = 0; d_req_we = 0; d_req_addr = 0; d_req_wdata = 0;
    for (int i = 0; i < 256; i++) begin shadow[i] = {$urandom, $urandom}; u_flash.poke(i, shadow[i]); end
    repeat (2) @(posedge clk); rst_n = 1;
    wait (d_done >= 600);
    repeat (40) @(posedge clk);
    checks++;
    if (conflicts == 0) begin failures++; $display("flash port never contended"); end
    checks++;
    if (d_exp.size() != 0) begin failures++; $display("%0d DMA responses missing", d_exp.size()); end
    $display("flash port contended %0d times", conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
