// tb_input_buffer: fills every line of a reduced 4-bank buffer through the beat write port,
// then reads random bytes from all banks in parallel and checks them, one cycle later,
// against a byte-level copy kept here. Also checks that a write to one bank leaves the
// others untouched.
module tb_input_buffer;
  localparam int R = 4, D = 64, BW = 64, BB = BW / 8, L = D / BB;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en; logic [4:0] wr_beat; logic [BW-1:0] wr_data;
  logic [R-1:0] rd_en; logic [5:0] rd_addr [R]; logic [7:0] rd_data [R];
  logic [7:0] ref_m [R][D];

  input_buffer #(.ROWS(R), .DEPTH(D), .BUS_W(BW)) dut (.*);

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_beat = 0; wr_data = 0; rd_en = 0;
    for (int r = 0; r < R; r++) rd_addr[r] = 0;
    for (int b = 0; b < R * L; b++) begin
      @(negedge clk); wr_en = 1; wr_beat = 5'(b);
      for (int k = 0; k < BB; k++) begin
        wr_data[k*8 +: 8] = 8'($urandom);
        ref_m[b / L][(b % L) * BB + k] = wr_data[k*8 +: 8];
      end
    end
    @(negedge clk); wr_en = 0;
    for (int k = 0; k < 400; k++) begin
      logic [5:0] a [R];
      @(negedge clk);
      rd_en = 4'($urandom) | 4'b0001;
      for (int r = 0; r < R; r++) begin a[r] = 6'($urandom); rd_addr[r] = a[r]; end
      // overwrite a line of bank 3 in the same cycle (read-before-write on the same line is
      // not checked)
      wr_en = (k % 5 == 0); wr_beat = 5'(3 * L + (k % L)); wr_data = {BB{8'($urandom)}};
      @(posedge clk); #1;
      for (int r = 0; r < R; r++) if (rd_en[r] && !(wr_en && r == 3 && a[r] / BB == k % L)) begin
        checks++;
        if (rd_data[r] !== ref_m[r][a[r]]) begin failures++; $display("bank %0d addr %0d got %h exp %h", r, a[r], rd_data[r], ref_m[r][a[r]]); end
      end
      if (wr_en) for (int b = 0; b < BB; b++) ref_m[3][(k % L) * BB + b] = wr_data[b*8 +: 8];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
