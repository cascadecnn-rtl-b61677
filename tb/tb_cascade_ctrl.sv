// tb_cascade_ctrl: plays the CEU for several batches with random pass/fail
// decisions, takes the re-processing list, answers with new classes in the
// HPU phase, and checks phase order, reconfiguration request, the list of
// failed samples, pass/fail counts and the final labels. One batch has no
// failures and must end straight after the LPU phase.
module tb_cascade_ctrl;
  import cascade_pkg::*;
  localparam int BATCH = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, reconfig_done = 0, done, reconfig_req;
  logic [4:0] batch_size = 0;
  phase_e phase;
  logic ceu_valid = 0, ceu_pass = 0;
  logic [9:0] ceu_class = 0;
  logic hpu_id_valid, hpu_id_ready = 0;
  logic [3:0] hpu_id, lbl_idx = 0;
  logic [9:0] lbl_class;
  logic [4:0] n_pass, n_fail;

  cascade_ctrl #(.BATCH(BATCH), .CLSW(10)) dut (.*);

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 4; b++) begin
      automatic int n = (b == 1) ? BATCH : 3 + 4 * b;
      automatic int lbl [] = new [n];
      automatic int fl [$];
      @(negedge clk) start = 1; batch_size = 5'(n);
      @(negedge clk) start = 0;
      chk(phase == PH_LPU, "LPU phase after start");
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        ceu_valid = 1; ceu_class = 10'($urandom_range(0, 999));
        ceu_pass = (b == 2) ? 1'b1 : ($urandom_range(0, 2) != 0);
        lbl[i] = ceu_class;
        if (!ceu_pass) fl.push_back(i);
        @(negedge clk) ceu_valid = 0;
      end
      @(posedge clk); #1;
      chk(int'(n_fail) == fl.size() && int'(n_pass) == n - fl.size(), "pass/fail counts");
      if (fl.size() == 0) begin
        chk(phase == PH_DONE && !reconfig_req, "no failures: done after LPU");
      end else begin
        chk(reconfig_req && phase == PH_LPU, "reconfiguration requested");
        repeat (3) @(posedge clk);
        @(negedge clk) reconfig_done = 1;
        @(negedge clk) reconfig_done = 0;
        chk(phase == PH_HPU && !reconfig_req, "HPU phase");
        for (int j = 0; j < fl.size(); j++) begin
          @(negedge clk);
          chk(hpu_id_valid && int'(hpu_id) == fl[j], $sformatf("re-process id %0d", j));
          hpu_id_ready = 1;
          @(negedge clk) hpu_id_ready = 0;
          ceu_valid = 1; ceu_class = 10'($urandom_range(0, 999)); ceu_pass = $urandom;
          lbl[fl[j]] = ceu_class;
          @(negedge clk) ceu_valid = 0;
        end
        #1 chk(phase == PH_DONE && !hpu_id_valid, "done after HPU phase");
      end
      for (int i = 0; i < n; i++) begin
        lbl_idx = 4'(i); #1;
        chk(int'(lbl_class) == lbl[i], $sformatf("label %0d", i));
      end
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
