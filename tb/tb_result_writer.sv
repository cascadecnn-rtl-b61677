// tb_result_writer: serves a random accumulator tile to the writer and
// checks the address and packed, requantised data of every write through a
// port with random back-pressure, plus the number of writes per tile.
module tb_result_writer;
  import cascade_pkg::*;
  localparam int TR = 4, TC = 16, WL = 8, ACCW = 24, WPR = TC*WL/64;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done, wr_valid, wr_ready = 0;
  addr_t base = 0, stride = 0;
  logic [SH_W-1:0] shift = 0;
  logic [1:0] rd_row;
  logic [TC-1:0][ACCW-1:0] rd_data;
  wr_req_t wr;
  logic [ACCW-1:0] tile [TR][TC];

  result_writer #(.TR(TR), .TC(TC), .WL(WL), .ACCW(ACCW)) dut (.*);

  always_comb for (int c = 0; c < TC; c++) rd_data[c] = tile[rd_row][c];

  function automatic logic [7:0] q(logic signed [ACCW-1:0] v, int s);
    logic signed [ACCW-1:0] t = v >>> s;
    if (t > 127) return 8'd127;
    if (t < -128) return 8'h80;
    return t[7:0];
  endfunction

  int nwr;
  always @(posedge clk) begin
    wr_ready <= ($urandom_range(0, 3) != 0);
    if (wr_valid && wr_ready) begin
      automatic int idx = int'(wr.addr - base);
      automatic int r = idx / int'(stride), w = idx % int'(stride);
      automatic logic [63:0] e;
      for (int i = 0; i < 8; i++) e[i*8 +: 8] = q(tile[r][w*8 + i], int'(shift));
      nwr++; checks++;
      if (w >= WPR || wr.data != e) begin failures++; $display("write %h: %h exp %h", wr.addr, wr.data, e); end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      for (int r = 0; r < TR; r++) for (int c = 0; c < TC; c++)
        tile[r][c] = (t == 0) ? ACCW'($urandom_range(0, 300) - 150) : ACCW'($urandom);
      nwr = 0;
      @(negedge clk);
      base = addr_t'(100 * t); stride = addr_t'(5); shift = SH_W'(t * 3); start = 1;
      @(negedge clk) start = 0;
      wait (done);
      @(posedge clk);
      checks++;
      if (nwr != TR * WPR) begin failures++; $display("%0d writes", nwr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
