// tb_dsp_dual_mult: exhaustive check of the packed dual multiplier.
// For WL = 4 every combination of the four operands is tried; for WL = 5 a
// random sample. Each recovered product is compared with a plain multiply.
module tb_dsp_dual_mult;
  int checks = 0, failures = 0;
  logic signed [3:0] a0, b0, a1, b1;
  logic signed [7:0] p0, p1;
  logic signed [4:0] c0, d0, c1, d1;
  logic signed [9:0] q0, q1;

  dsp_dual_mult #(.WL(4)) dut4 (.a0, .b0, .a1, .b1, .p0, .p1);
  dsp_dual_mult #(.WL(5)) dut5 (.a0(c0), .b0(d0), .a1(c1), .b1(d1), .p0(q0), .p1(q1));

  initial begin
    for (int i = 0; i < 65536; i++) begin
      {a0, b0, a1, b1} = 16'(i);
      #1;
      checks += 2;
      if (p0 != 8'(a0 * b0) || p1 != 8'(a1 * b1)) begin
        failures++;
        if (failures < 10) $display("WL4 mismatch %0d*%0d=%0d %0d*%0d=%0d", a0, b0, p0, a1, b1, p1);
      end
    end
    for (int i = 0; i < 50000; i++) begin
      {c0, d0, c1, d1} = 20'($urandom);
      if (i < 16) {c0, d0, c1, d1} = {4{(i % 2) ? 5'sd15 : -5'sd16}};
      #1;
      checks += 2;
      if (q0 != 10'(c0 * d0) || q1 != 10'(c1 * d1)) begin
        failures++;
        if (failures < 10) $display("WL5 mismatch %0d*%0d=%0d %0d*%0d=%0d", c0, d0, q0, c1, d1, q1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
