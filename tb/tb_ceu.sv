// tb_ceu: streams random probability vectors (back to back and with gaps)
// into the CEU with several M, N and thresholds, and compares the score,
// pass/fail and top-1 class with a reference that sorts the whole vector.
// Also checks the one-cycle result latency.
module tb_ceu;
  localparam int PW = 16, NMAX = 10, NCLS = 1000, SCW = PW + 4 + 1;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [3:0] cfg_m, cfg_n;
  logic signed [SCW-1:0] cfg_th;
  logic in_valid = 0, in_last = 0;
  logic [PW-1:0] in_prob = 0;
  logic out_valid, out_pass;
  logic [9:0] out_class;
  logic signed [SCW-1:0] out_score;
  int npass = 0, nfail = 0;

  ceu #(.PW(PW), .NMAX(NMAX), .NCLS(NCLS)) dut (.*);

  int exp_score [$], exp_cls [$], t_last [$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic send(int ncls, int spiky);
    int v [] = new [ncls];
    int s [] = new [ncls];
    int best = 0, sc = 0;
    for (int i = 0; i < ncls; i++) begin
      v[i] = $urandom_range(0, spiky ? 300 : 3000);
      if (spiky && i == 7) v[i] = 40000;
      if (i % 11 == 3) v[i] = v[i > 0 ? i-1 : 0]; // ties
    end
    for (int i = 0; i < ncls; i++) if (v[i] > v[best]) best = i;
    s = v; s.rsort();
    for (int i = 0; i < NMAX && i < ncls; i++)
      if (i < int'(cfg_m)) sc += s[i]; else if (i < int'(cfg_n)) sc -= s[i];
    for (int i = 0; i < ncls; i++) begin
      @(negedge clk);
      while ($urandom_range(0, 4) == 0) begin in_valid = 0; @(negedge clk); end
      in_valid = 1; in_prob = PW'(v[i]); in_last = (i == ncls - 1);
    end
    exp_score.push_back(sc); exp_cls.push_back(best); t_last.push_back(cyc);
  endtask

  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      automatic int es = exp_score.pop_front(), ec = exp_cls.pop_front(), tl = t_last.pop_front();
      automatic bit ep = (es >= int'(cfg_th));
      checks += 4;
      if (int'(out_score) != es) begin failures++; $display("score %0d exp %0d", out_score, es); end
      if (out_pass != ep) begin failures++; $display("pass %0d exp %0d", out_pass, ep); end
      if (int'(out_class) != ec) begin failures++; $display("class %0d exp %0d", out_class, ec); end
      if (cyc - tl != 1) begin failures++; $display("latency %0d", cyc - tl); end
      if (out_pass) npass++; else nfail++;
    end
  end

  initial begin
    cfg_m = 5; cfg_n = 10; cfg_th = 20000;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 40; k++) begin
      if (k == 20) begin
        @(negedge clk) in_valid = 0;
        repeat (3) @(posedge clk);
        cfg_m = 1; cfg_n = 2; cfg_th = 5000;
      end
      send((k % 4 == 0) ? 1000 : 50 + k, k % 2);
    end
    @(negedge clk) in_valid = 0;
    repeat (4) @(posedge clk);
    checks++;
    if (exp_score.size() != 0 || npass == 0 || nfail == 0) begin
      failures++; $display("left %0d pass %0d fail %0d", exp_score.size(), npass, nfail);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
