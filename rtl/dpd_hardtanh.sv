// dpd_hardtanh: piecewise-linear tanh, y = clamp(x, -1, 1).
//
// The accelerator replaces tanh with this hard version: two comparators and a
// multiplexer. The input carries 10 fractional bits and is wider than Q2.10
// (default 14 bits) so that the candidate pre-activation is clipped before any
// saturation. The output is Q2.10 in [-1024, 1024] LSB. Purely combinational.
module dpd_hardtanh #(
  parameter int IN_W = 14
) (
  input  logic signed [IN_W-1:0] x,
  output dpd_pkg::fx_t           y
);
  import dpd_pkg::*;
  localparam logic signed [IN_W-1:0] ONE  = IN_W'(1 <<< FRAC_W);
  localparam logic signed [IN_W-1:0] MONE = -ONE;

  always_comb begin
    if (x > ONE)       y = FX_ONE;
    else if (x < MONE) y = -FX_ONE;
    else               y = fx_t'(x);
  end
endmodule
