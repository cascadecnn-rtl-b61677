// ceu: confidence evaluation unit.
//
// Decides whether the low-precision unit's prediction for a sample can be
// trusted. The class probabilities of the sample stream in one per cycle;
// the unit keeps the NMAX largest of them, sorted, in an insertion register
// file (each new value is compared with all entries at once and shifted in at
// its rank). After the last class it computes the generalised
// Best-vs-Second-Best metric of the paper,
//     gBvSB<M,N>(p) = sum_{i=1..M} p_i  -  sum_{j=M+1..N} p_j
// over the sorted probabilities, and declares the prediction confident
// (pass, processing ends here) when gBvSB >= th; otherwise the sample fails
// and must be re-processed by the high-precision unit. M, N and th are
// run-time inputs (the paper tunes them per application; its example is
// M = 5, N = 10). The class with the largest probability is reported as the
// predicted label. Probabilities are unsigned PW-bit fractions (value /
// 2^PW); that number format, and doing the top-N selection by insertion,
// are this design's own choices. Ties keep the earlier class.
// Interface: in_valid/in_prob/in_last, no back-pressure; a new sample may
// start on the cycle after in_last. out_valid pulses one cycle after the
// in_last beat together with pass, top-1 class and the score.
module ceu #(
  parameter int unsigned PW   = 16,
  parameter int unsigned NMAX = 10,
  parameter int unsigned NCLS = 1000,
  localparam int unsigned CLSW = $clog2(NCLS),
  localparam int unsigned NW   = $clog2(NMAX+1),
  localparam int unsigned SCW  = PW + $clog2(NMAX) + 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [NW-1:0]          cfg_m,
  input  logic [NW-1:0]          cfg_n,
  input  logic signed [SCW-1:0]  cfg_th,
  input  logic                   in_valid,
  input  logic [PW-1:0]          in_prob,
  input  logic                   in_last,
  output logic                   out_valid,
  output logic                   out_pass,
  output logic [CLSW-1:0]        out_class,
  output logic signed [SCW-1:0]  out_score
);
  logic [PW-1:0]   top_v [NMAX];
  logic [CLSW-1:0] top_c [NMAX];
  logic [PW-1:0]   nxt_v [NMAX];
  logic [CLSW-1:0] nxt_c [NMAX];
  logic [CLSW-1:0] cls;
  logic signed [SCW-1:0] score;

  // Insertion of the incoming value at its rank.
  always_comb begin
    for (int i = 0; i < NMAX; i++) begin
      nxt_v[i] = top_v[i];
      nxt_c[i] = top_c[i];
      if (in_prob > top_v[i]) begin
        if (i == 0 || in_prob <= top_v[(i == 0) ? 0 : i-1]) begin
          nxt_v[i] = in_prob;
          nxt_c[i] = cls;
        end else begin
          nxt_v[i] = top_v[(i == 0) ? 0 : i-1];
          nxt_c[i] = top_c[(i == 0) ? 0 : i-1];
        end
      end
    end
  end

  // gBvSB over the list including the last value.
  always_comb begin
    score = '0;
    for (int i = 0; i < NMAX; i++) begin
      if (NW'(i) < cfg_m)      score = score + SCW'(nxt_v[i]);
      else if (NW'(i) < cfg_n) score = score - SCW'(nxt_v[i]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NMAX; i++) begin
        top_v[i] <= '0;
        top_c[i] <= '0;
      end
      cls       <= '0;
      out_valid <= 1'b0;
      out_pass  <= 1'b0;
      out_class <= '0;
      out_score <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        if (in_last) begin
          out_valid <= 1'b1;
          out_pass  <= (score >= cfg_th);
          out_class <= nxt_c[0];
          out_score <= score;
          cls       <= '0;
          for (int i = 0; i < NMAX; i++) begin
            top_v[i] <= '0;
            top_c[i] <= '0;
          end
        end else begin
          cls <= cls + 1'b1;
          for (int i = 0; i < NMAX; i++) begin
            top_v[i] <= nxt_v[i];
            top_c[i] <= nxt_c[i];
          end
        end
      end
    end
  end

endmodule
