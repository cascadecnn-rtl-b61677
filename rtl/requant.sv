// requant: dynamic fixed-point rescaling of one value.
//
// Every layer has its own scaling factor (position of the binary point) for
// weights and activations while the wordlength is the same across the
// network. Moving a value from one scaling to another with fewer fractional
// bits is an arithmetic right shift by the difference of the scalings,
// followed by saturation to the target wordlength. This block does that for
// two uses: turning accumulators into output activations of the layer, and
// deriving low-precision weights at run time from the high-precision weights
// stored in memory. Rounding is truncation toward minus infinity and
// overflow saturates to the most positive or most negative code; both are
// this design's choices, the paper does not specify them.
// Interface: combinational, IN_W-bit signed in, OUT_W-bit signed out.
module requant #(
  parameter int unsigned IN_W  = 32,
  parameter int unsigned OUT_W = 8,
  parameter int unsigned SH_W  = 6
) (
  input  logic signed [IN_W-1:0]  x,
  input  logic        [SH_W-1:0]  shift,
  output logic signed [OUT_W-1:0] y
);
  localparam logic signed [IN_W-1:0] MAXV = IN_W'((64'sd1 <<< (OUT_W-1)) - 1);
  localparam logic signed [IN_W-1:0] MINV = -IN_W'(64'sd1 <<< (OUT_W-1));

  logic signed [IN_W-1:0] shifted;

  always_comb begin
    shifted = x >>> shift;
    if (shifted > MAXV)      y = MAXV[OUT_W-1:0];
    else if (shifted < MINV) y = MINV[OUT_W-1:0];
    else                     y = shifted[OUT_W-1:0];
  end

endmodule
