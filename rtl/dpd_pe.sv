// dpd_pe: multiply-accumulate processing element.
//
// The basic cell of every PE array: one multiplier, one adder and an
// accumulator register fed back into the adder. When `en` is high the PE adds
// a*w to its accumulator; when `first` is also high the sum restarts from
// `init` instead of the old accumulator (this is how a bias is preloaded).
// The full 24-bit product of two Q2.10 operands is kept, so the accumulator
// carries 20 fractional bits.
//
// Timing: one MAC per cycle, result visible on `acc` the cycle after `en`.
// The multiplier/adder/register structure follows the accelerator's PE; the
// init/first preload and the 32-bit accumulator width are this design's
// choices. The accumulator has no reset: `first` always loads it before use.
module dpd_pe #(
  parameter int DATA_W = 12,
  parameter int ACC_W  = 32
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     first,
  input  logic signed [ACC_W-1:0]  init,
  input  logic signed [DATA_W-1:0] a,
  input  logic signed [DATA_W-1:0] w,
  output logic signed [ACC_W-1:0]  acc
);
  logic signed [2*DATA_W-1:0] prod;
  logic signed [ACC_W-1:0]    base;

  always_comb begin
    prod = a * w;
    base = first ? init : acc;
  end

  always_ff @(posedge clk) begin
    if (en) acc <= base + ACC_W'(prod);
  end
endmodule
