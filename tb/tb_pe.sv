// tb_pe: random dot products through two PEs, an 8-bit one with plain
// multipliers and a 4-bit one whose multipliers are packed in pairs. A new
// vector enters every cycle; each result must appear exactly 1 + log2(TP)
// cycles later and equal the integer dot product.
module tb_pe;
  localparam int TP = 16;
  localparam int LAT = 1 + $clog2(TP);
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 in_valid;
  logic [TP-1:0][7:0]   a8, w8;
  logic [TP-1:0][3:0]   a4, w4;
  logic                 v8, v4;
  logic signed [19:0]   d8;
  logic signed [11:0]   d4;

  pe #(.WL(8), .TP(TP), .PACK(1'b0)) dut8 (.clk, .rst_n, .in_valid, .act(a8), .wgt(w8), .out_valid(v8), .dot(d8));
  pe #(.WL(4), .TP(TP), .PACK(1'b1)) dut4 (.clk, .rst_n, .in_valid, .act(a4), .wgt(w4), .out_valid(v4), .dot(d4));

  int exp8 [$], exp4 [$], tin [$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    in_valid = 0; a8 = '0; w8 = '0; a4 = '0; w4 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      for (int i = 0; i < TP; i++) begin
        a8[i] = 8'($urandom); w8[i] = 8'($urandom);
        a4[i] = 4'($urandom); w4[i] = 4'($urandom);
        if (n < 4) begin a8[i] = 8'h80; w8[i] = 8'h80; a4[i] = 4'h8; w4[i] = 4'h8; end
      end
      if (in_valid) begin
        automatic int s8 = 0, s4 = 0;
        for (int i = 0; i < TP; i++) begin
          s8 += int'($signed(a8[i])) * int'($signed(w8[i]));
          s4 += int'($signed(a4[i])) * int'($signed(w4[i]));
        end
        exp8.push_back(s8); exp4.push_back(s4); tin.push_back(cyc);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (exp8.size() != 0) begin failures++; $display("%0d results missing", exp8.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (v8 !== v4) failures++;
    if (v8) begin
      automatic int e8, e4, t;
      e8 = exp8.pop_front(); e4 = exp4.pop_front(); t = tin.pop_front();
      checks += 3;
      if (int'(d8) != e8) begin failures++; $display("d8 %0d exp %0d", d8, e8); end
      if (int'(d4) != e4) begin failures++; $display("d4 %0d exp %0d", d4, e4); end
      if (cyc - t != LAT) begin failures++; $display("latency %0d", cyc - t); end
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
