// tb_result_accum: random row updates (first-step overwrite or accumulate)
// against a model of the T_R x T_C accumulator array; every row is read back.
module tb_result_accum;
  localparam int TR = 8, TC = 4, DOTW = 12, ACCW = 20;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_first = 0;
  logic [2:0] in_row = 0, rd_row = 0;
  logic [TC-1:0][DOTW-1:0] in_dot = '0;
  logic [TC-1:0][ACCW-1:0] rd_data;
  int model [TR][TC];

  result_accum #(.TR(TR), .TC(TC), .DOTW(DOTW), .ACCW(ACCW)) dut (.*);

  initial begin
    for (int p = 0; p < 6; p++) begin
      for (int r = 0; r < TR; r++) begin
        @(negedge clk);
        in_valid = 1; in_first = (p == 0) || (p == 3); in_row = r[2:0];
        for (int c = 0; c < TC; c++) begin
          in_dot[c] = DOTW'($urandom);
          model[r][c] = (in_first ? 0 : model[r][c]) + int'($signed(in_dot[c]));
        end
      end
      @(negedge clk) in_valid = 0;
      for (int r = 0; r < TR; r++) begin
        rd_row = r[2:0];
        #1;
        for (int c = 0; c < TC; c++) begin
          checks++;
          if (int'($signed(rd_data[c])) != model[r][c]) begin
            failures++; $display("r%0d c%0d got %0d exp %0d", r, c, $signed(rd_data[c]), model[r][c]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
