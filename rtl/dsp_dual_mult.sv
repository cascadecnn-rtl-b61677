// dsp_dual_mult: two independent signed WL x WL products on one 25x18
// signed multiplier.
//
// For wordlengths of 5 bits or less, two multiplications that share no
// operand are packed on a single DSP multiplier: the operands are placed as
//   A = a0 + a1 * 2^K   (25-bit port),   B = b0 + b1 * 2^K   (18-bit port)
// so that  A*B = a0*b0 + (a0*b1 + a1*b0) * 2^K + a1*b1 * 2^(2K).
// K = 17 - WL leaves enough zero guard bits between the three terms that
// a0*b0 and a1*b1 can be recovered exactly: a0*b0 is the low 2*WL bits read
// as a signed number, the middle term is removed from the next K bits, and
// a1*b1 is what remains above 2K. The packing idea (guard bits, pairs of
// MACCs per 25x18 DSP, WL <= 5) follows the paper; the choice of K and the
// signed extraction are this design's own.
// Interface: purely combinational; the caller registers the products.
module dsp_dual_mult #(
  parameter int unsigned WL = 4
) (
  input  logic signed [WL-1:0]   a0,
  input  logic signed [WL-1:0]   b0,
  input  logic signed [WL-1:0]   a1,
  input  logic signed [WL-1:0]   b1,
  output logic signed [2*WL-1:0] p0,
  output logic signed [2*WL-1:0] p1
);
  localparam int unsigned K = 17 - WL;

  if (WL > 5 || WL < 2) begin : g_bad_wl
    $error("dsp_dual_mult supports wordlengths of 2 to 5 bits");
  end

  logic signed [24:0] dsp_a;
  logic signed [17:0] dsp_b;
  logic signed [42:0] prod;
  logic signed [42:0] rem1;
  logic signed [K-1:0] mid;

  always_comb begin
    dsp_a = 25'(a0) + (25'(a1) <<< K);
    dsp_b = 18'(b0) + (18'(b1) <<< K);
    prod  = 43'(dsp_a) * 43'(dsp_b);
    p0    = prod[2*WL-1:0];
    rem1  = (prod - 43'(p0)) >>> K;
    mid = rem1[K-1:0];
    p1    = (2*WL)'((rem1 - 43'(mid)) >>> K);
  end

endmodule
