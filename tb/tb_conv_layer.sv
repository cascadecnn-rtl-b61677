// tb_conv_layer: real convolutional layers, cast as matrix products, on both
// processing units at their default tile sizes.
//
// The testbench acts as host and memory. It builds the unrolled input
// matrix (im2col: one row per output pixel, one column per kernel tap and
// input channel, P = K*K*N_IN, zero-padded to a multiple of T_P), stores the
// kernels as a C x P matrix, runs one command and compares every output
// activation with a direct convolution computed here by nested loops over
// output pixel, output channel, input channel and kernel tap. The direct
// loops do not use the unrolled matrix, so the check covers the
// convolution-to-matrix mapping as well as the arithmetic.
//
// Layers (channel counts and spatial size cut so the run stays short):
//   * high-precision unit (8 bit, tiles 64/64/32): a VGG-16 style 3x3,
//     stride-1, pad-1 layer, 64 -> 64 channels, 8x8 output pixels
//     (R = 64, P = 576, C = 64: nine P-steps, two column tiles);
//   * low-precision unit (4 bit, packed multipliers, weights derived from
//     the 8-bit kernels, tiles 64/64/64): an AlexNet conv1 style 11x11,
//     stride-4 layer, 3 -> 64 channels, 8x8 output pixels from a 39x39
//     input (P = 363 padded to 384).
// The tile sizes and precisions are those of the top's defaults; the layer
// crops are this testbench's choice. Memories stall at random and answer
// reads after a fixed latency. A watchdog ends the run after 2,000,000
// cycles.
module tb_conv_layer;
  import cascade_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- high-precision unit and its memory ----------------
  logic h_start = 0, h_busy, h_done;
  mm_cmd_t h_cmd;
  logic h_a_req_valid, h_a_req_ready, h_a_rsp_valid;
  logic h_w_req_valid, h_w_req_ready, h_w_rsp_valid;
  logic h_o_wr_valid, h_o_wr_ready;
  rd_req_t h_a_req, h_w_req;
  word_t h_a_rsp_data, h_w_rsp_data;
  wr_req_t h_o_wr;

  mm_unit u_hpu (
    .clk, .rst_n, .start(h_start), .cmd(h_cmd), .busy(h_busy), .done(h_done),
    .a_req_valid(h_a_req_valid), .a_req_ready(h_a_req_ready), .a_req(h_a_req),
    .a_rsp_valid(h_a_rsp_valid), .a_rsp_data(h_a_rsp_data),
    .w_req_valid(h_w_req_valid), .w_req_ready(h_w_req_ready), .w_req(h_w_req),
    .w_rsp_valid(h_w_rsp_valid), .w_rsp_data(h_w_rsp_data),
    .o_wr_valid(h_o_wr_valid), .o_wr_ready(h_o_wr_ready), .o_wr(h_o_wr));

  mem_model #(.RD_LAT(5), .STALL_PCT(20)) h_mem (
    .clk,
    .a_req_valid(h_a_req_valid), .a_req_ready(h_a_req_ready), .a_req(h_a_req),
    .a_rsp_valid(h_a_rsp_valid), .a_rsp_data(h_a_rsp_data),
    .w_req_valid(h_w_req_valid), .w_req_ready(h_w_req_ready), .w_req(h_w_req),
    .w_rsp_valid(h_w_rsp_valid), .w_rsp_data(h_w_rsp_data),
    .o_wr_valid(h_o_wr_valid), .o_wr_ready(h_o_wr_ready), .o_wr(h_o_wr));

  // ---------------- low-precision unit and its memory ----------------
  logic l_start = 0, l_busy, l_done;
  mm_cmd_t l_cmd;
  logic l_a_req_valid, l_a_req_ready, l_a_rsp_valid;
  logic l_w_req_valid, l_w_req_ready, l_w_rsp_valid;
  logic l_o_wr_valid, l_o_wr_ready;
  rd_req_t l_a_req, l_w_req;
  word_t l_a_rsp_data, l_w_rsp_data;
  wr_req_t l_o_wr;

  mm_unit #(.WL(4), .W_SRC_WL(8), .TR(64), .TP(64), .TC(64), .PACK(1'b1)) u_lpu (
    .clk, .rst_n, .start(l_start), .cmd(l_cmd), .busy(l_busy), .done(l_done),
    .a_req_valid(l_a_req_valid), .a_req_ready(l_a_req_ready), .a_req(l_a_req),
    .a_rsp_valid(l_a_rsp_valid), .a_rsp_data(l_a_rsp_data),
    .w_req_valid(l_w_req_valid), .w_req_ready(l_w_req_ready), .w_req(l_w_req),
    .w_rsp_valid(l_w_rsp_valid), .w_rsp_data(l_w_rsp_data),
    .o_wr_valid(l_o_wr_valid), .o_wr_ready(l_o_wr_ready), .o_wr(l_o_wr));

  mem_model #(.RD_LAT(5), .STALL_PCT(20)) l_mem (
    .clk,
    .a_req_valid(l_a_req_valid), .a_req_ready(l_a_req_ready), .a_req(l_a_req),
    .a_rsp_valid(l_a_rsp_valid), .a_rsp_data(l_a_rsp_data),
    .w_req_valid(l_w_req_valid), .w_req_ready(l_w_req_ready), .w_req(l_w_req),
    .w_rsp_valid(l_w_rsp_valid), .w_rsp_data(l_w_rsp_data),
    .o_wr_valid(l_o_wr_valid), .o_wr_ready(l_o_wr_ready), .o_wr(l_o_wr));

  localparam addr_t A_BASE = 'h1000, W_BASE = 'h8000, O_BASE = 'h10000;

  // ---------------- helpers ----------------
  function automatic int sat(longint v, int s, int wl);
    longint t = v >>> s;
    longint mx = (64'sd1 <<< (wl-1)) - 1;
    if (t > mx) return int'(mx);
    if (t < -mx-1) return int'(-mx-1);
    return int'(t);
  endfunction

  // store one wl-bit element at element index idx of a packed matrix
  task automatic put(bit lpu, addr_t base, int idx, int wl, int v);
    addr_t a = base + addr_t'((idx * wl) / 64);
    int    b = (idx * wl) % 64;
    word_t wd = lpu ? l_mem.rd(a) : h_mem.rd(a);
    for (int i = 0; i < wl; i++) wd[b+i] = v[i];
    if (lpu) l_mem.write_word(a, wd); else h_mem.write_word(a, wd);
  endtask

  function automatic int get(bit lpu, addr_t base, int idx, int wl);
    addr_t a = base + addr_t'((idx * wl) / 64);
    word_t wd = lpu ? l_mem.rd(a) : h_mem.rd(a);
    int b = (idx * wl) % 64;
    logic [31:0] v = '0;
    for (int i = 0; i < wl; i++) v[i] = wd[b+i];
    return int'($signed(v << (32-wl))) >>> (32-wl);
  endfunction

  // ---------------- layer runner ----------------
  // Feature map fm[ci][y][x] of size NIN x HIN x HIN, kernels k[co][ci][ky][kx].
  // in_wl: stored activation width; w_shift derives the unit's weights.
  task automatic run_layer(bit lpu, string name, int NIN, int HIN, int K, int S, int PAD,
                           int COUT, int PPAD, int in_wl, int wsh, int osh);
    int HOUT = (HIN + 2*PAD - K) / S + 1;
    int R = HOUT * HOUT;
    int P = K * K * NIN;
    int fm [];
    int kw [];
    int cycles = 0, nsat = 0;
    longint acc;
    fm = new[NIN * HIN * HIN];
    kw = new[COUT * NIN * K * K];
    foreach (fm[i]) fm[i] = (in_wl == 8) ? int'($urandom_range(0, 255)) - 128 : int'($urandom_range(0, 15)) - 8;
    foreach (kw[i]) kw[i] = int'($urandom_range(0, 255)) - 128;
    // im2col, row = output pixel, column = (ky*K + kx)*NIN + ci
    for (int oy = 0; oy < HOUT; oy++) for (int ox = 0; ox < HOUT; ox++)
      for (int p = 0; p < PPAD; p++) begin
        int v = 0;
        if (p < P) begin
          int ci = p % NIN, t = p / NIN;
          int ky = t / K, kx = t % K;
          int iy = oy*S + ky - PAD, ix = ox*S + kx - PAD;
          if (iy >= 0 && iy < HIN && ix >= 0 && ix < HIN) v = fm[(ci*HIN + iy)*HIN + ix];
        end
        put(lpu, A_BASE, (oy*HOUT + ox)*PPAD + p, in_wl, v);
      end
    // kernels: one C x P row per output channel, stored at 8 bits
    for (int co = 0; co < COUT; co++) for (int p = 0; p < PPAD; p++) begin
      int v = 0;
      if (p < P) begin
        int ci = p % NIN, t = p / NIN;
        v = kw[((co*NIN + ci)*K + t / K)*K + t % K];
      end
      put(lpu, W_BASE, co*PPAD + p, 8, v);
    end
    @(negedge clk);
    if (lpu) begin
      l_cmd = '{a_base: A_BASE, w_base: W_BASE, o_base: O_BASE, r: DIM_W'(R), p: DIM_W'(PPAD),
                c: DIM_W'(COUT), w_shift: SH_W'(wsh), o_shift: SH_W'(osh)};
      l_start = 1; @(negedge clk) l_start = 0;
      while (!l_done) begin @(negedge clk); cycles++; end
    end else begin
      h_cmd = '{a_base: A_BASE, w_base: W_BASE, o_base: O_BASE, r: DIM_W'(R), p: DIM_W'(PPAD),
                c: DIM_W'(COUT), w_shift: SH_W'(wsh), o_shift: SH_W'(osh)};
      h_start = 1; @(negedge clk) h_start = 0;
      while (!h_done) begin @(negedge clk); cycles++; end
    end
    // direct convolution reference
    for (int oy = 0; oy < HOUT; oy++) for (int ox = 0; ox < HOUT; ox++)
      for (int co = 0; co < COUT; co++) begin
        int exp_v, got;
        acc = 0;
        for (int ci = 0; ci < NIN; ci++) for (int ky = 0; ky < K; ky++) for (int kx = 0; kx < K; kx++) begin
          int iy = oy*S + ky - PAD, ix = ox*S + kx - PAD;
          if (iy >= 0 && iy < HIN && ix >= 0 && ix < HIN)
            acc += longint'(fm[(ci*HIN + iy)*HIN + ix]) *
                   longint'(sat(kw[((co*NIN + ci)*K + ky)*K + kx], wsh, lpu ? 4 : 8));
        end
        exp_v = sat(acc, osh, in_wl);
        if (exp_v != int'(acc >>> osh)) nsat++;
        got = get(lpu, O_BASE, (oy*HOUT + ox)*COUT + co, in_wl);
        chk(got == exp_v, $sformatf("%s out(%0d,%0d,%0d) got %0d exp %0d", name, oy, ox, co, got, exp_v));
      end
    // The unit performs R*PPAD*COUT MACCs; with T_R rows per P-step it can
    // never be faster than one row per cycle.
    chk(cycles >= R * (PPAD / 64) * (COUT / (lpu ? 64 : 32)), {name, ": cycle lower bound"});
    $display("%s: R=%0d P=%0d (padded %0d) C=%0d cycles=%0d MACC/cycle=%0d output saturations=%0d",
             name, R, P, PPAD, COUT, cycles, (R * PPAD * COUT) / cycles, nsat);
  endtask

  initial begin
    h_cmd = '0; l_cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_layer(1'b0, "VGG-16 3x3 layer (HPU, 8 bit)", 64, 8, 3, 1, 1, 64, 576, 8, 0, 10);
    run_layer(1'b1, "AlexNet conv1 layer (LPU, 4 bit)", 3, 39, 11, 4, 0, 64, 384, 4, 2, 7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
