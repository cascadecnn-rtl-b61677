// tb_mm_unit: runs random layers through two processing units, one in the
// low-precision configuration (4-bit, packed DSP multipliers, weights
// derived from 8-bit storage) and one in the high-precision configuration
// (8-bit), with small tiles and a memory that stalls at random, and checks
// all outputs, the rows-per-cycle rhythm and the number of P-steps.
module tb_mm_unit;
  logic clk = 0, rst_n = 0, go = 0;
  always #5 clk = ~clk;
  logic f_l, f_h;
  int c_l, c_h, e_l, e_h, o_l, o_h, s_l, s_h;
  int checks, failures;

  mm_unit_harness #(.WL(4), .W_SRC_WL(8), .TR(4), .TP(16), .TC(16), .PACK(1'b1),
                    .R(8), .P(32), .C(32)) h_lpu (
    .clk, .rst_n, .go, .finished(f_l), .checks(c_l), .failures(e_l), .overlaps(o_l), .stalls(s_l));
  mm_unit_harness #(.WL(8), .W_SRC_WL(8), .TR(4), .TP(8), .TC(8), .PACK(1'b0),
                    .R(12), .P(24), .C(16)) h_hpu (
    .clk, .rst_n, .go, .finished(f_h), .checks(c_h), .failures(e_h), .overlaps(o_h), .stalls(s_h));

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk) go = 1;
    wait (f_l && f_h);
    checks = c_l + c_h + 2; failures = e_l + e_h;
    if (o_l == 0 || o_h == 0) begin failures++; $display("no load overlapped computation"); end
    if (s_l == 0 || s_h == 0) begin failures++; $display("no memory stall happened"); end
    $display("overlap cycles %0d/%0d, stall cycles %0d/%0d", o_l, o_h, s_l, s_h);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c_l + c_h, e_l + e_h + 1);
    $finish;
  end
endmodule
