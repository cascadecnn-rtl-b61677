// tb_cascadecnn_top: end-to-end run of the cascade on one batch.
//
// The testbench plays the host and the off-chip memory. A batch of NB
// samples goes through a classifier layer (FC layer cast as a matrix
// product, R = samples, P = features, C = classes) on the low-precision
// unit; the host reads the 4-bit scores, computes softmax and streams the
// probabilities into the CEU. Samples judged unconfident are collected by
// the cascade controller; after the (modelled) reconfiguration the host
// gathers their 8-bit inputs into a compact matrix, runs the same layer on
// the high-precision unit and streams those probabilities. Checked against
// a reference computed here: every output word of both units, every CEU
// score and decision, the re-processing list and every final label. Each
// mechanism of the design must occur at least once: memory stalls,
// tile loads overlapping computation, packed-DSP products, saturation of
// derived weights, CEU pass and fail, the switch to the HPU, HPU
// re-processing and the refusal of a start aimed at the inactive unit.
module tb_cascadecnn_top;
  import cascade_pkg::*;
  localparam int L_TR = 4, L_TP = 16, L_TC = 16;
  localparam int H_TR = 4, H_TP = 8, H_TC = 8;
  localparam int BATCH = 16, NCLS = 16;
  localparam int NB = 12, P = 32, C = 16;
  localparam int WLL = 4, WLH = 8, PW = 16, NMAX = 10;
  localparam int BW = $clog2(BATCH+1), IW = $clog2(BATCH), CLSW = $clog2(NCLS);
  localparam int SCW = PW + $clog2(NMAX) + 1;
  localparam int WSH = 2, OSH_L = 4, OSH_H = 7;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic batch_start = 0, reconfig_req, reconfig_done = 0, batch_done;
  logic [BW-1:0] batch_size = 0, n_pass, n_fail;
  phase_e phase;
  logic lpu_start = 0, lpu_busy, lpu_done, hpu_start = 0, hpu_busy, hpu_done;
  mm_cmd_t lpu_cmd = '0, hpu_cmd = '0;
  logic lpu_a_req_valid, lpu_a_req_ready, lpu_a_rsp_valid, lpu_w_req_valid, lpu_w_req_ready, lpu_w_rsp_valid;
  logic lpu_o_wr_valid, lpu_o_wr_ready;
  rd_req_t lpu_a_req, lpu_w_req; word_t lpu_a_rsp_data, lpu_w_rsp_data; wr_req_t lpu_o_wr;
  logic hpu_a_req_valid, hpu_a_req_ready, hpu_a_rsp_valid, hpu_w_req_valid, hpu_w_req_ready, hpu_w_rsp_valid;
  logic hpu_o_wr_valid, hpu_o_wr_ready;
  rd_req_t hpu_a_req, hpu_w_req; word_t hpu_a_rsp_data, hpu_w_rsp_data; wr_req_t hpu_o_wr;
  logic prob_valid = 0, prob_last = 0;
  logic [PW-1:0] prob = 0;
  logic [3:0] ceu_m = 5, ceu_n = 10;
  logic signed [SCW-1:0] ceu_th = 0;
  logic dec_valid, dec_pass;
  logic [CLSW-1:0] dec_class;
  logic signed [SCW-1:0] dec_score;
  logic hpu_id_valid, hpu_id_ready = 0;
  logic [IW-1:0] hpu_id, lbl_idx = 0;
  logic [CLSW-1:0] lbl_class;

  cascadecnn_top #(.L_TR(L_TR), .L_TP(L_TP), .L_TC(L_TC), .H_TR(H_TR), .H_TP(H_TP), .H_TC(H_TC),
                   .BATCH(BATCH), .NCLS(NCLS)) dut (.*);

  mem_model #(.RD_LAT(4), .STALL_PCT(20)) mem_l (
    .clk, .a_req_valid(lpu_a_req_valid), .a_req_ready(lpu_a_req_ready), .a_req(lpu_a_req),
    .a_rsp_valid(lpu_a_rsp_valid), .a_rsp_data(lpu_a_rsp_data),
    .w_req_valid(lpu_w_req_valid), .w_req_ready(lpu_w_req_ready), .w_req(lpu_w_req),
    .w_rsp_valid(lpu_w_rsp_valid), .w_rsp_data(lpu_w_rsp_data),
    .o_wr_valid(lpu_o_wr_valid), .o_wr_ready(lpu_o_wr_ready), .o_wr(lpu_o_wr));
  mem_model #(.RD_LAT(4), .STALL_PCT(20)) mem_h (
    .clk, .a_req_valid(hpu_a_req_valid), .a_req_ready(hpu_a_req_ready), .a_req(hpu_a_req),
    .a_rsp_valid(hpu_a_rsp_valid), .a_rsp_data(hpu_a_rsp_data),
    .w_req_valid(hpu_w_req_valid), .w_req_ready(hpu_w_req_ready), .w_req(hpu_w_req),
    .w_rsp_valid(hpu_w_rsp_valid), .w_rsp_data(hpu_w_rsp_data),
    .o_wr_valid(hpu_o_wr_valid), .o_wr_ready(hpu_o_wr_ready), .o_wr(hpu_o_wr));

  localparam addr_t XL_BASE = 'h1000, XH_BASE = 'h3000, W_BASE = 'h6000, O_BASE = 'h9000, XC_BASE = 'hC000;
  localparam int RL = ((NB + L_TR - 1) / L_TR) * L_TR;

  int x8 [NB][P];     // 8-bit input features
  int w8 [C][P];      // 8-bit classifier weights
  int ref_l [NB][C], ref_h [NB][C];
  int fail_ids [$];
  int ref_cls_l [NB], ref_cls_h [NB];
  int ref_score [NB];
  // mechanism counters
  int n_overlap = 0, n_pack = 0, n_wsat = 0, n_osat = 0, n_pass_seen = 0, n_fail_seen = 0;
  int n_switch = 0, n_reproc = 0, n_refused = 0;

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  function automatic int sat(longint v, int s, int wl);
    longint t = v >>> s;
    longint mx = (64'sd1 <<< (wl-1)) - 1;
    if (t > mx) return int'(mx);
    if (t < -mx-1) return int'(-mx-1);
    return int'(t);
  endfunction

  task automatic put(bit h, addr_t base, int idx, int wl, int v);
    addr_t a = base + addr_t'((idx * wl) / 64);
    int    b = (idx * wl) % 64;
    word_t wd = h ? mem_h.rd(a) : mem_l.rd(a);
    for (int i = 0; i < wl; i++) wd[b+i] = v[i];
    if (h) mem_h.write_word(a, wd); else mem_l.write_word(a, wd);
  endtask

  function automatic int get(bit h, addr_t base, int idx, int wl);
    word_t wd = h ? mem_h.rd(base + addr_t'((idx * wl) / 64)) : mem_l.rd(base + addr_t'((idx * wl) / 64));
    int b = (idx * wl) % 64;
    logic [31:0] v = '0;
    for (int i = 0; i < wl; i++) v[i] = wd[b+i];
    return int'($signed(v << (32-wl))) >>> (32-wl);
  endfunction

  // Host softmax: scores are fixed-point with `frac` fractional bits.
  task automatic softmax(int sc [C], int frac, output int pr [C]);
    real e [C];
    real s = 0.0;
    for (int i = 0; i < C; i++) begin e[i] = $exp(real'(sc[i]) / real'(1 << frac)); s += e[i]; end
    for (int i = 0; i < C; i++) pr[i] = int'($floor(e[i] / s * 65535.0));
  endtask

  function automatic int gbvsb(int pr [C], output int top1);
    int s [C];
    int sc = 0;
    top1 = 0;
    for (int i = 0; i < C; i++) if (pr[i] > pr[top1]) top1 = i;
    s = pr; s.rsort();
    for (int i = 0; i < NMAX && i < C; i++) if (i < 5) sc += s[i]; else if (i < 10) sc -= s[i];
    return sc;
  endfunction

  task automatic stream(int pr [C]);
    for (int i = 0; i < C; i++) begin
      @(negedge clk);
      prob_valid = 1; prob = PW'(pr[i]); prob_last = (i == C - 1);
    end
    @(negedge clk) prob_valid = 0; prob_last = 0;
  endtask

  // monitors
  int dec_q_score [$], dec_q_pass [$], dec_q_cls [$];
  always @(posedge clk) if (rst_n) begin
    if ((dut.u_lpu.iss_valid && (dut.u_lpu.u_ld_a.busy || dut.u_lpu.u_ld_w.busy)) ||
        (dut.u_hpu.iss_valid && (dut.u_hpu.u_ld_a.busy || dut.u_hpu.u_ld_w.busy))) n_overlap++;
    if (dut.u_lpu.pe_in_valid) n_pack += L_TC * L_TP / 2;
    if (dec_valid) begin dec_q_score.push_back(int'(dec_score)); dec_q_pass.push_back(dec_pass); dec_q_cls.push_back(int'(dec_class)); end
  end

  initial begin
    int pr [C];
    int sc [C];
    int nf, rh;
    for (int s = 0; s < NB; s++) for (int p = 0; p < P; p++) x8[s][p] = $urandom_range(0, 255) - 128;
    for (int c = 0; c < C; c++) for (int p = 0; p < P; p++) w8[c][p] = $urandom_range(0, 255) - 128;
    // The LPU's input is the 4-bit version of the same features.
    for (int s = 0; s < NB; s++) for (int p = 0; p < P; p++) begin
      put(0, XL_BASE, s*P + p, WLL, sat(x8[s][p], 4, WLL));
      put(1, XH_BASE, s*P + p, WLH, x8[s][p]);
    end
    for (int c = 0; c < C; c++) for (int p = 0; p < P; p++) begin
      put(0, W_BASE, c*P + p, WLH, w8[c][p]);
      put(1, W_BASE, c*P + p, WLH, w8[c][p]);
      if (sat(w8[c][p], WSH, WLL) != (w8[c][p] >>> WSH)) n_wsat++;
    end
    // reference scores
    for (int s = 0; s < NB; s++) for (int c = 0; c < C; c++) begin
      automatic longint al = 0, ah = 0;
      for (int p = 0; p < P; p++) begin
        al += longint'(sat(x8[s][p], 4, WLL)) * longint'(sat(w8[c][p], WSH, WLL));
        ah += longint'(x8[s][p]) * longint'(w8[c][p]);
      end
      ref_l[s][c] = sat(al, OSH_L, WLL);
      ref_h[s][c] = sat(ah, OSH_H + 4, WLH);
      if (ref_l[s][c] != (al >>> OSH_L)) n_osat++;
    end
    for (int s = 0; s < NB; s++) begin
      for (int c = 0; c < C; c++) sc[c] = ref_l[s][c];
      softmax(sc, 1, pr);
      ref_score[s] = gbvsb(pr, ref_cls_l[s]);
      for (int c = 0; c < C; c++) sc[c] = ref_h[s][c];
      softmax(sc, 4, pr);
      void'(gbvsb(pr, ref_cls_h[s]));
    end
    // threshold at the median reference score: about half the samples fail
    begin
      int srt [NB];
      for (int s = 0; s < NB; s++) srt[s] = ref_score[s];
      srt.sort();
      ceu_th = SCW'(srt[NB/2]);
    end
    for (int s = 0; s < NB; s++) if (ref_score[s] < int'(ceu_th)) fail_ids.push_back(s);

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk) batch_start = 1; batch_size = BW'(NB);
    @(negedge clk) batch_start = 0;
    chk(phase == PH_LPU, "LPU phase");
    // a start for the inactive HPU must be ignored
    hpu_cmd.r = 16'(H_TR); hpu_cmd.p = 16'(P); hpu_cmd.c = 16'(C);
    hpu_start = 1;
    @(negedge clk) hpu_start = 0;
    repeat (2) @(posedge clk);
    if (!hpu_busy) n_refused++;
    chk(!hpu_busy, "HPU start refused in LPU phase");

    // ---- LPU phase ----
    @(negedge clk);
    lpu_cmd.a_base = XL_BASE; lpu_cmd.w_base = W_BASE; lpu_cmd.o_base = O_BASE;
    lpu_cmd.r = 16'(RL); lpu_cmd.p = 16'(P); lpu_cmd.c = 16'(C);
    lpu_cmd.w_shift = SH_W'(WSH); lpu_cmd.o_shift = SH_W'(OSH_L);
    lpu_start = 1;
    @(negedge clk) lpu_start = 0;
    wait (lpu_done);
    @(posedge clk);
    for (int s = 0; s < NB; s++) begin
      for (int c = 0; c < C; c++) begin
        sc[c] = get(0, O_BASE, s*C + c, WLL);
        chk(sc[c] == ref_l[s][c], $sformatf("LPU out[%0d][%0d]=%0d exp %0d", s, c, sc[c], ref_l[s][c]));
      end
      softmax(sc, 1, pr);
      stream(pr);
    end
    repeat (2) @(posedge clk);
    for (int s = 0; s < NB; s++) begin
      automatic int g = dec_q_score.pop_front(), gp = dec_q_pass.pop_front(), gc = dec_q_cls.pop_front();
      chk(g == ref_score[s], $sformatf("score %0d: %0d exp %0d", s, g, ref_score[s]));
      chk(gp == (ref_score[s] >= int'(ceu_th)), "decision");
      chk(gc == ref_cls_l[s], "LPU class");
      if (gp) n_pass_seen++; else n_fail_seen++;
    end
    chk(int'(n_fail) == fail_ids.size(), "fail count");
    nf = fail_ids.size();
    if (nf != 0) begin
      chk(reconfig_req, "reconfiguration requested");
      if (reconfig_req) n_switch++;
      repeat (5) @(posedge clk);
      @(negedge clk) reconfig_done = 1;
      @(negedge clk) reconfig_done = 0;
      chk(phase == PH_HPU, "HPU phase");
      // ---- HPU phase: gather the failed samples ----
      for (int j = 0; j < nf; j++) begin
        automatic int id;
        @(negedge clk);
        chk(hpu_id_valid, "re-processing id available");
        id = int'(hpu_id);
        chk(id == fail_ids[j], $sformatf("re-processing id %0d", j));
        hpu_id_ready = 1;
        @(negedge clk) hpu_id_ready = 0;
        for (int p = 0; p < P; p++) put(1, XC_BASE, j*P + p, WLH, x8[id][p]);
      end
      rh = ((nf + H_TR - 1) / H_TR) * H_TR;
      for (int j = nf; j < rh; j++) for (int p = 0; p < P; p++) put(1, XC_BASE, j*P + p, WLH, 0);
      @(negedge clk);
      hpu_cmd.a_base = XC_BASE; hpu_cmd.w_base = W_BASE; hpu_cmd.o_base = O_BASE;
      hpu_cmd.r = 16'(rh); hpu_cmd.p = 16'(P); hpu_cmd.c = 16'(C);
      hpu_cmd.w_shift = '0; hpu_cmd.o_shift = SH_W'(OSH_H + 4);
      hpu_start = 1;
      @(negedge clk) hpu_start = 0;
      wait (hpu_done);
      @(posedge clk);
      for (int j = 0; j < nf; j++) begin
        for (int c = 0; c < C; c++) begin
          sc[c] = get(1, O_BASE, j*C + c, WLH);
          chk(sc[c] == ref_h[fail_ids[j]][c], $sformatf("HPU out[%0d][%0d]", j, c));
        end
        softmax(sc, 4, pr);
        stream(pr);
        n_reproc++;
      end
    end
    repeat (3) @(posedge clk);
    chk(phase == PH_DONE, "batch done");
    for (int s = 0; s < NB; s++) begin
      automatic bit failed = 0;
      foreach (fail_ids[j]) if (fail_ids[j] == s) failed = 1;
      lbl_idx = IW'(s); #1;
      chk(int'(lbl_class) == (failed ? ref_cls_h[s] : ref_cls_l[s]), $sformatf("final label %0d", s));
    end
    // every mechanism must have happened
    $display("stalls %0d/%0d overlap %0d packed-products %0d weight-sat %0d out-sat %0d pass %0d fail %0d switch %0d reproc %0d refused %0d",
             mem_l.stalls, mem_h.stalls, n_overlap, n_pack, n_wsat, n_osat, n_pass_seen, n_fail_seen, n_switch, n_reproc, n_refused);
    chk(mem_l.stalls > 0 && mem_h.stalls > 0, "memory stall happened");
    chk(n_overlap > 0, "load/compute overlap happened");
    chk(n_pack > 0, "packed DSP products happened");
    chk(n_wsat > 0, "weight derivation saturated");
    chk(n_osat > 0, "output saturation happened");
    chk(n_pass_seen > 0 && n_fail_seen > 0, "CEU pass and fail happened");
    chk(n_switch > 0 && n_reproc > 0, "switch to HPU and re-processing happened");
    chk(n_refused > 0, "start of inactive unit refused");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
