// pe: processing element, one fully unrolled T_P-element dot product.
//
// A row of T_P activations and a column of T_P weights enter together; T_P
// multipliers form the products and a binary adder tree reduces them to one
// sum, as in the paper's PE (a multiplier array followed by an adder tree).
// A new pair of vectors can enter every cycle. When PACK is set (only legal
// for wordlengths of 5 bits or less) neighbouring multipliers are merged in
// pairs onto one 25x18 multiplier (dsp_dual_mult), doubling the MACCs per
// DSP as the paper proposes for the low-precision unit.
// Timing: products are registered, each tree level is registered; the sum
// appears LAT = 1 + log2(TP) cycles after the inputs, with out_valid.
// TP must be a power of two (a choice of this design).
module pe #(
  parameter int unsigned WL   = 8,
  parameter int unsigned TP   = 64,
  parameter bit          PACK = 1'b0,
  localparam int unsigned LG   = $clog2(TP),
  localparam int unsigned DOTW = 2*WL + LG
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic [TP-1:0][WL-1:0]      act,
  input  logic [TP-1:0][WL-1:0]      wgt,
  output logic                       out_valid,
  output logic signed [DOTW-1:0]     dot
);
  if ((1 << LG) != TP) begin : g_bad_tp
    $error("pe: TP must be a power of two");
  end

  logic signed [2*WL-1:0] prod [TP];
  logic signed [DOTW-1:0] tree [LG+1][TP];
  logic [LG:0]            vld;

  if (PACK) begin : g_packed
    for (genvar i = 0; i < TP/2; i++) begin : g_pair
      dsp_dual_mult #(.WL(WL)) u_dsp (
        .a0(act[2*i]),   .b0(wgt[2*i]),
        .a1(act[2*i+1]), .b1(wgt[2*i+1]),
        .p0(prod[2*i]),  .p1(prod[2*i+1])
      );
    end
  end else begin : g_lut
    for (genvar i = 0; i < TP; i++) begin : g_mul
      assign prod[i] = signed'(act[i]) * signed'(wgt[i]);
    end
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < TP; i++) tree[0][i] <= DOTW'(prod[i]);
    for (int l = 0; l < LG; l++)
      for (int i = 0; i < TP/2; i++)
        if (i < (TP >> (l + 1))) tree[l+1][i] <= tree[l][2*i] + tree[l][2*i+1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[LG-1:0], in_valid};
  end

  assign out_valid = vld[LG];
  assign dot       = tree[LG][0];

endmodule
