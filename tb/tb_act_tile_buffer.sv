// tb_act_tile_buffer: fills both banks chunk by chunk with random data,
// interleaving writes to one bank with reads of the other, and checks every
// row read one cycle after its request.
module tb_act_tile_buffer;
  localparam int WL = 4, TR = 8, TP = 32, CW = 32, NCH = TP*WL/CW;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, wr_bank = 0, rd_en = 0, rd_bank = 0;
  logic [2:0] wr_row = 0, rd_row = 0;
  logic [2:0] wr_chunk = 0;
  logic [CW-1:0] wr_data = 0;
  logic [TP-1:0][WL-1:0] rd_data;
  logic [TP*WL-1:0] model [2][TR];

  act_tile_buffer #(.WL(WL), .TR(TR), .TP(TP), .CHUNK_W(CW)) dut (.*);

  initial begin
    for (int b = 0; b < 2; b++)
      for (int r = 0; r < TR; r++)
        for (int c = 0; c < NCH; c++) begin
          @(negedge clk);
          wr_en = 1; wr_bank = b[0]; wr_row = r[2:0]; wr_chunk = c[2:0]; wr_data = $urandom;
          model[b][r][c*CW +: CW] = wr_data;
        end
    @(negedge clk) wr_en = 0;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      // write bank ~rd_bank while reading rd_bank
      rd_en = 1; rd_bank = n[4]; rd_row = 3'($urandom);
      wr_en = 1; wr_bank = ~rd_bank; wr_row = 3'($urandom); wr_chunk = 3'($urandom_range(0, NCH-1));
      wr_data = $urandom;
      @(posedge clk);
      #1;
      checks++;
      if (rd_data != model[rd_bank][rd_row]) begin failures++; $display("row %0d bank %0d mismatch", rd_row, rd_bank); end
      model[wr_bank][wr_row][wr_chunk*CW +: CW] = wr_data;
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
