// dpd_hardsigmoid: piecewise-linear sigmoid, y = clamp(x/4 + 1/2, 0, 1).
//
// The accelerator replaces the sigmoid with this hard version: 1 above x = 2,
// 0 below x = -2 and x/4 + 1/2 in between, which costs two comparators, a
// 2-bit arithmetic shift and an add. The input carries 10 fractional bits and
// is wider than Q2.10 (default 14 bits) so that a gate pre-activation (sum of
// two Q2.10 numbers) is clipped correctly before any saturation. The output is
// Q2.10 in [0, 1024] LSB. x/4 rounds toward minus infinity (this design's
// choice). Purely combinational.
module dpd_hardsigmoid #(
  parameter int IN_W = 14
) (
  input  logic signed [IN_W-1:0] x,
  output dpd_pkg::fx_t           y
);
  import dpd_pkg::*;
  localparam logic signed [IN_W-1:0] TWO  = IN_W'(2 <<< FRAC_W);
  localparam logic signed [IN_W-1:0] MTWO = -TWO;

  logic signed [IN_W-1:0] lin;

  always_comb begin
    lin = (x >>> 2) + IN_W'(1 <<< (FRAC_W - 1));
    if (x > TWO)       y = FX_ONE;
    else if (x < MTWO) y = '0;
    else               y = fx_t'(lin);
  end
endmodule
