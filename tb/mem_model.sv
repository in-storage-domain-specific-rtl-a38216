// mem_model: behavioural model of a memory behind the drive's request/response protocol, used
// for the flash side (SSD controller) and the drive DRAM (memory controller) in testbenches.
// Requests are accepted on valid && ready; ready drops at random on STALL percent of cycles.
// A read returns its word LAT cycles after acceptance, in request order. Words are indexed by
// the beat address modulo DEPTH (bits [31:28] are ignored). Not synthesizable.
module mem_model #(
  parameter int BUS_W = 256,
  parameter int DEPTH = 1024,
  parameter int LAT   = 4,
  parameter int STALL = 20
) (
  input  logic             clk,
  input  logic             req_valid,
  output logic             req_ready,
  input  logic             req_we,
  input  logic [31:0]      req_addr,
  input  logic [BUS_W-1:0] req_wdata,
  output logic             rsp_valid,
  output logic [BUS_W-1:0] rsp_rdata
);
  logic [BUS_W-1:0] mem [DEPTH];
  logic [BUS_W-1:0] q_data [$];
  longint           q_time [$];
  longint           now = 0;
  int               reads = 0, writes = 0;

  initial begin
    req_ready = 1'b1;
    rsp_valid = 1'b0;
    rsp_rdata = '0;
  end

  always @(posedge clk) begin
    now++;
    if (req_valid && req_ready) begin
      if (req_we) begin
        mem[req_addr[27:0] % DEPTH] <= req_wdata;
        writes++;
      end else begin
        q_data.push_back(mem[req_addr[27:0] % DEPTH]);
        q_time.push_back(now + LAT - 1);
        reads++;
      end
    end
    if (q_time.size() != 0 && q_time[0] <= now) begin
      rsp_valid <= 1'b1;
      rsp_rdata <= q_data.pop_front();
      void'(q_time.pop_front());
    end else begin
      rsp_valid <= 1'b0;
    end
    req_ready <= ($urandom_range(0, 99) >= STALL);
  end

  // backdoor access for testbenches
  function automatic void poke(int addr, logic [BUS_W-1:0] v);
    mem[addr % DEPTH] = v;
  endfunction
  function automatic logic [BUS_W-1:0] peek(int addr);
    return mem[addr % DEPTH];
  endfunction
endmodule
