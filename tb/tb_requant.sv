// tb_requant: random values and shifts against an integer reference of
// "arithmetic shift right, then saturate to OUT_W bits".
module tb_requant;
  int checks = 0, failures = 0;
  logic signed [31:0] x;
  logic [5:0]         sh;
  logic signed [7:0]  y;
  logic signed [7:0]  w8;
  logic signed [3:0]  y4;

  requant #(.IN_W(32), .OUT_W(8), .SH_W(6)) dut (.x, .shift(sh), .y);
  requant #(.IN_W(8), .OUT_W(4), .SH_W(6)) dut4 (.x(w8), .shift(sh), .y(y4));

  function automatic longint ref_q(longint v, int s, int ow);
    longint r = v >>> s;
    longint mx = (64'sd1 <<< (ow-1)) - 1;
    longint mn = -(64'sd1 <<< (ow-1));
    if (r > mx) return mx;
    if (r < mn) return mn;
    return r;
  endfunction

  initial begin
    for (int i = 0; i < 20000; i++) begin
      x  = (i % 3 == 0) ? 32'($signed($urandom_range(0, 4000)) - 2000) : $urandom;
      w8 = 8'($urandom);
      sh = 6'($urandom_range(0, (i % 2) ? 8 : 31));
      #1;
      checks += 2;
      if (longint'(y) != ref_q(longint'(x), int'(sh), 8)) begin
        failures++;
        if (failures < 10) $display("mismatch x=%0d sh=%0d y=%0d", x, sh, y);
      end
      if (longint'(y4) != ref_q(longint'(w8), int'(sh), 4)) begin
        failures++;
        if (failures < 10) $display("mismatch4 x=%0d sh=%0d y=%0d", w8, sh, y4);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
