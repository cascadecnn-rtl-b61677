// mm_unit_harness: test harness around one mm_unit. On go it writes random
// matrices (activations at WL bits, weights at W_SRC_WL bits) into a
// behavioural memory, runs NRUN layer commands of size R x P x C with
// different shifts, and compares every output word with a reference
// computed here: weights rescaled to WL (shift right, saturate), integer
// dot products, then output rescaling (shift right, saturate to WL).
// It also checks the compute rhythm: each P-step issues its T_R rows on
// T_R consecutive cycles, and the number of P-steps per layer is
// (R/T_R)(C/T_C)(P/T_P). Counters of stalls and of loads overlapping
// computation are exported for the caller.
module mm_unit_harness
  import cascade_pkg::*;
#(
  parameter int WL = 8, parameter int W_SRC_WL = 8,
  parameter int TR = 4, parameter int TP = 8, parameter int TC = 8,
  parameter bit PACK = 1'b0,
  parameter int R = 8, parameter int P = 16, parameter int C = 16,
  parameter int NRUN = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic go,
  output logic finished,
  output int   checks,
  output int   failures,
  output int   overlaps,
  output int   stalls
);
  logic start, busy, done;
  mm_cmd_t cmd;
  logic a_req_valid, a_req_ready, a_rsp_valid, w_req_valid, w_req_ready, w_rsp_valid;
  logic o_wr_valid, o_wr_ready;
  rd_req_t a_req, w_req;
  word_t a_rsp_data, w_rsp_data;
  wr_req_t o_wr;

  mm_unit #(.WL(WL), .W_SRC_WL(W_SRC_WL), .TR(TR), .TP(TP), .TC(TC), .PACK(PACK)) dut (.*);
  mem_model #(.RD_LAT(3), .STALL_PCT(15)) mem (.*);

  localparam addr_t A_BASE = 'h1000, W_BASE = 'h4000, O_BASE = 'h8000;
  int a_m [R][P];
  int w_m [C][P];

  function automatic int sat(longint v, int s, int wl);
    longint t = v >>> s;
    longint mx = (64'sd1 <<< (wl-1)) - 1;
    if (t > mx) return int'(mx);
    if (t < -mx-1) return int'(-mx-1);
    return int'(t);
  endfunction

  task automatic put(addr_t base, int idx, int wl, int v);
    addr_t a = base + addr_t'((idx * wl) / 64);
    int    b = (idx * wl) % 64;
    word_t wd = mem.rd(a);
    for (int i = 0; i < wl; i++) wd[b+i] = v[i];
    mem.write_word(a, wd);
  endtask

  function automatic int get(addr_t base, int idx, int wl);
    word_t wd = mem.rd(base + addr_t'((idx * wl) / 64));
    int b = (idx * wl) % 64;
    logic [31:0] v = '0;
    for (int i = 0; i < wl; i++) v[i] = wd[b+i];
    return int'($signed(v << (32-wl))) >>> (32-wl);
  endfunction

  // rhythm monitor
  int run_len, steps;
  always @(posedge clk) begin
    if (!rst_n) run_len <= 0;
    else if (dut.iss_valid) run_len <= run_len + 1;
    else if (run_len != 0) begin
      checks <= checks + 1;
      if (run_len != TR) begin
        failures <= failures + 1;
        $display("P-step issued %0d rows in a run, expected %0d", run_len, TR);
      end
      steps <= steps + 1;
      run_len <= 0;
    end
    if (dut.iss_valid && (dut.u_ld_a.busy || dut.u_ld_w.busy)) overlaps <= overlaps + 1;
  end
  assign stalls = mem.stalls;

  initial begin
    finished = 0; checks = 0; failures = 0; overlaps = 0; run_len = 0; steps = 0;
    start = 0; cmd = '0;
    wait (go);
    for (int run = 0; run < NRUN; run++) begin
      automatic int wsh = (W_SRC_WL != WL) ? 2 + run : 0;
      automatic int osh = (WL == 4) ? 3 + run : 5 + run;
      for (int r = 0; r < R; r++) for (int p = 0; p < P; p++) begin
        a_m[r][p] = $urandom_range(0, (1 << WL) - 1) - (1 << (WL-1));
        if (run == 0 && r == 0) a_m[r][p] = -(1 << (WL-1));
        put(A_BASE, r*P + p, WL, a_m[r][p]);
      end
      for (int c = 0; c < C; c++) for (int p = 0; p < P; p++) begin
        w_m[c][p] = $urandom_range(0, (1 << W_SRC_WL) - 1) - (1 << (W_SRC_WL-1));
        put(W_BASE, c*P + p, W_SRC_WL, w_m[c][p]);
      end
      @(negedge clk);
      cmd.a_base = A_BASE; cmd.w_base = W_BASE; cmd.o_base = O_BASE;
      cmd.r = DIM_W'(R); cmd.p = DIM_W'(P); cmd.c = DIM_W'(C);
      cmd.w_shift = SH_W'(wsh); cmd.o_shift = SH_W'(osh);
      steps = 0;
      start = 1;
      @(negedge clk) start = 0;
      wait (done);
      repeat (2) @(posedge clk);
      checks++;
      if (steps != (R/TR)*(C/TC)*(P/TP)) begin
        failures++; $display("%0d P-steps, expected %0d", steps, (R/TR)*(C/TC)*(P/TP));
      end
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
        automatic longint acc = 0;
        automatic int e, g;
        for (int p = 0; p < P; p++) acc += longint'(a_m[r][p]) * longint'(sat(w_m[c][p], wsh, WL));
        e = sat(acc, osh, WL);
        g = get(O_BASE, r*C + c, WL);
        checks++;
        if (g != e) begin
          failures++;
          if (failures < 10) $display("out[%0d][%0d]=%0d expected %0d (acc %0d)", r, c, g, e, acc);
        end
      end
    end
    finished = 1;
  end
endmodule
