// tb_wgt_tile_buffer: writes random chunks to both banks and checks that the
// parallel read of a bank shows every column, and that writes into one bank
// leave the other bank's view unchanged.
module tb_wgt_tile_buffer;
  localparam int WL = 4, TC = 4, TP = 16, CW = 32, NCH = TP*WL/CW;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, wr_bank = 0, rd_bank = 0;
  logic [1:0] wr_col = 0;
  logic [1:0] wr_chunk = 0;
  logic [CW-1:0] wr_data = 0;
  logic [TC-1:0][TP-1:0][WL-1:0] rd_data;
  logic [TP*WL-1:0] model [2][TC];

  wgt_tile_buffer #(.WL(WL), .TC(TC), .TP(TP), .CHUNK_W(CW)) dut (.*);

  initial begin
    for (int b = 0; b < 2; b++)
      for (int c = 0; c < TC; c++)
        for (int k = 0; k < NCH; k++) begin
          @(negedge clk);
          wr_en = 1; wr_bank = b[0]; wr_col = c[1:0]; wr_chunk = k[1:0]; wr_data = $urandom;
          model[b][c][k*CW +: CW] = wr_data;
        end
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      rd_bank = n[3];
      wr_en = 1; wr_bank = ~rd_bank; wr_col = 2'($urandom); wr_chunk = 2'($urandom_range(0, NCH-1));
      wr_data = $urandom;
      #1;
      for (int c = 0; c < TC; c++) begin
        checks++;
        if (rd_data[c] != model[rd_bank][c]) begin failures++; $display("col %0d bank %0d mismatch", c, rd_bank); end
      end
      @(posedge clk);
      model[wr_bank][wr_col][wr_chunk*CW +: CW] = wr_data;
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
