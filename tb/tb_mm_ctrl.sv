// tb_mm_ctrl: drives the loop controller with models of the loaders, the PE
// pipeline and the writer (each answering after random delays) and checks
// the order of tile loads and write-backs against the loop nest of the
// tiled multiplication, the bank alternation, the first-step flag, that the
// next tiles are prefetched while a step computes, and that each step issues
// its T_R rows on consecutive cycles.
module tb_mm_ctrl;
  import cascade_pkg::*;
  localparam int TR = 4, TP = 8, TC = 8, WL = 4, WS = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done;
  mm_cmd_t cmd;
  logic ld_start, ld_bank, ld_a_done = 0, ld_w_done = 0;
  addr_t ld_a_base, ld_a_stride, ld_w_base, ld_w_stride, wb_base, wb_stride;
  logic [SH_W-1:0] ld_w_shift, wb_shift;
  logic iss_valid, iss_bank, iss_first, acc_valid;
  logic [1:0] iss_row;
  logic wb_start, wb_done = 0;

  mm_ctrl #(.TR(TR), .TP(TP), .TC(TC), .WL(WL), .W_SRC_WL(WS)) dut (.*);

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // PE pipeline model: acc_valid follows iss_valid by 5 cycles
  logic [4:0] pipe = '0;
  always @(posedge clk) pipe <= {pipe[3:0], iss_valid};
  assign acc_valid = pipe[4];

  // loader and writer models
  always @(posedge clk) begin
    if (ld_start) fork
      begin repeat ($urandom_range(1, 30)) @(posedge clk); ld_a_done <= 1; @(posedge clk); ld_a_done <= 0; end
      begin repeat ($urandom_range(1, 30)) @(posedge clk); ld_w_done <= 1; @(posedge clk); ld_w_done <= 0; end
    join_none
    if (wb_start) fork
      begin repeat ($urandom_range(1, 20)) @(posedge clk); wb_done <= 1; @(posedge clk); wb_done <= 0; end
    join_none
  end

  typedef struct { addr_t a; addr_t w; logic bank; } ld_t;
  ld_t loads [$];
  addr_t wbs [$];
  int run = 0, runs = 0, prefetch = 0, firsts = 0;
  logic step_first;
  always @(posedge clk) if (rst_n) begin
    if (ld_start) begin
      loads.push_back('{ld_a_base, ld_w_base, ld_bank});
      if (iss_valid) prefetch++;
    end
    if (wb_start) wbs.push_back(wb_base);
    if (iss_valid) begin
      if (run == 0) step_first = iss_first;
      else if (iss_first != step_first) begin failures++; $display("first flag changed inside a step"); end
      if (int'(iss_row) != run) begin failures++; $display("row %0d issued at position %0d", iss_row, run); end
      run++;
    end else if (run != 0) begin
      checks++;
      if (run != TR) begin failures++; $display("step issued %0d rows", run); end
      runs++; if (step_first) firsts++;
      run = 0;
    end
  end

  initial begin
    cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2; t++) begin
      automatic int R = 8 + 4 * t, P = 16 + 8 * t, C = 16;
      automatic int k = 0;
      loads.delete(); wbs.delete(); runs = 0; prefetch = 0; firsts = 0;
      @(negedge clk);
      cmd.a_base = 'h100; cmd.w_base = 'h2000; cmd.o_base = 'h9000;
      cmd.r = DIM_W'(R); cmd.p = DIM_W'(P); cmd.c = DIM_W'(C);
      start = 1;
      @(negedge clk) start = 0;
      wait (done);
      @(posedge clk);
      chk(runs == (R/TR)*(C/TC)*(P/TP), "number of P-steps");
      chk(firsts == (R/TR)*(C/TC), "first-step flags");
      chk(loads.size() == runs, "number of tile loads");
      chk(prefetch == runs - 1, "loads overlapped with computation");
      chk(ld_a_stride == addr_t'(P*WL/64) && ld_w_stride == addr_t'(P*WS/64) &&
          wb_stride == addr_t'(C*WL/64), "strides");
      for (int rt = 0; rt < R/TR; rt++)
        for (int ct = 0; ct < C/TC; ct++) begin
          for (int pt = 0; pt < P/TP; pt++) begin
            if (k < loads.size()) begin
              chk(loads[k].a == 'h100 + addr_t'((rt*TR*P + pt*TP)*WL/64), $sformatf("act tile %0d address", k));
              chk(loads[k].w == 'h2000 + addr_t'((ct*TC*P + pt*TP)*WS/64), $sformatf("wgt tile %0d address", k));
              chk(loads[k].bank == k[0], $sformatf("tile %0d bank", k));
            end
            k++;
          end
          if (wbs.size() != 0)
            chk(wbs.pop_front() == 'h9000 + addr_t'((rt*TR*C + ct*TC)*WL/64), "write-back address");
        end
      chk(wbs.size() == 0, "no extra write-backs");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
