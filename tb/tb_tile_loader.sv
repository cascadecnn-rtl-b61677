// tb_tile_loader: loads tiles through a random-stall memory and checks every
// buffer write. One loader copies 8-bit values unchanged, a second derives
// 4-bit values from stored 8-bit ones with a shift of 3 (saturating).
module tb_tile_loader;
  import cascade_pkg::*;
  localparam int NROWS = 4, TP = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start;
  addr_t base, stride;
  logic busy8, done8, busy4, done4;
  logic rq8_v, rq8_r, rs8_v, rq4_v, rq4_r, rs4_v;
  rd_req_t rq8, rq4;
  word_t rs8_d, rs4_d;
  logic we8, we4;
  logic [1:0] row8, row4;
  logic [1:0] ch8, ch4;
  logic [63:0] wd8;
  logic [31:0] wd4;
  logic unused_o;
  wr_req_t no_wr;

  tile_loader #(.NROWS(NROWS), .TP(TP), .SRC_WL(8), .DST_WL(8)) dut8 (
    .clk, .rst_n, .start, .base, .stride, .shift(6'd0), .busy(busy8), .done(done8),
    .req_valid(rq8_v), .req_ready(rq8_r), .req(rq8), .rsp_valid(rs8_v), .rsp_data(rs8_d),
    .wr_en(we8), .wr_row(row8), .wr_chunk(ch8), .wr_data(wd8));
  tile_loader #(.NROWS(NROWS), .TP(TP), .SRC_WL(8), .DST_WL(4)) dut4 (
    .clk, .rst_n, .start, .base, .stride, .shift(6'd3), .busy(busy4), .done(done4),
    .req_valid(rq4_v), .req_ready(rq4_r), .req(rq4), .rsp_valid(rs4_v), .rsp_data(rs4_d),
    .wr_en(we4), .wr_row(row4), .wr_chunk(ch4), .wr_data(wd4));

  assign no_wr = '0;
  mem_model #(.RD_LAT(3), .STALL_PCT(30)) mem (
    .clk, .a_req_valid(rq8_v), .a_req_ready(rq8_r), .a_req(rq8), .a_rsp_valid(rs8_v), .a_rsp_data(rs8_d),
    .w_req_valid(rq4_v), .w_req_ready(rq4_r), .w_req(rq4), .w_rsp_valid(rs4_v), .w_rsp_data(rs4_d),
    .o_wr_valid(1'b0), .o_wr_ready(unused_o), .o_wr(no_wr));

  function automatic logic [3:0] sat4(logic signed [7:0] v);
    logic signed [7:0] s = v >>> 3;
    if (s > 7) return 4'd7;
    if (s < -8) return 4'h8;
    return s[3:0];
  endfunction

  int n8, n4;
  always @(posedge clk) begin
    if (we8) begin
      automatic word_t e = mem.rd(base + addr_t'(row8) * stride + addr_t'(ch8));
      checks++; n8++;
      if (wd8 != e) begin failures++; $display("8-bit row %0d ch %0d got %h exp %h", row8, ch8, wd8, e); end
    end
    if (we4) begin
      automatic word_t e = mem.rd(base + addr_t'(row4) * stride + addr_t'(ch4));
      automatic logic [31:0] c;
      for (int i = 0; i < 8; i++) c[i*4 +: 4] = sat4(e[i*8 +: 8]);
      checks++; n4++;
      if (wd4 != c) begin failures++; $display("4-bit row %0d ch %0d got %h exp %h", row4, ch4, wd4, c); end
    end
  end

  initial begin
    start = 0; base = 0; stride = 0;
    for (int a = 0; a < 256; a++) mem.write_word(addr_t'(a), {$urandom, $urandom});
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3; t++) begin
      n8 = 0; n4 = 0;
      @(negedge clk);
      base = addr_t'(t * 37); stride = addr_t'(2 + t * 5); start = 1;
      @(negedge clk) start = 0;
      fork
        wait (done8);
        wait (done4);
      join
      @(posedge clk);
      checks++;
      if (n8 != NROWS*2 || n4 != NROWS*2) begin failures++; $display("write counts %0d %0d", n8, n4); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
