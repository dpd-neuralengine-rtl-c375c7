// dpd_input_pe_array: input-to-gate product W_ih x_t + b_ih for the r, z and n gates.
//
// One MAC PE per gate row (30 PEs). The preprocessor broadcasts one feature
// per cycle (I, Q, |x|^2, |x|^4) and the weight buffer supplies column
// `in_step` of W_ih, one weight per row; after four `en` cycles each PE holds
// its row's dot product. The first cycle preloads the bias b_ih. The outputs y
// are the accumulators floored and saturated to Q2.10, combinational from the
// PE registers, and stay valid until the next `first`.
//
// The array's place in the datapath follows the accelerator; its size (30 of
// the 156 PEs, one per row, 4 cycles per sample) is this design's choice.
module dpd_input_pe_array #(
  parameter int N_ROWS = 30
) (
  input  logic         clk,
  input  logic         en,
  input  logic         first,
  input  dpd_pkg::fx_t x,
  input  dpd_pkg::fx_t w [N_ROWS],
  input  dpd_pkg::fx_t b [N_ROWS],
  output dpd_pkg::fx_t y [N_ROWS]
);
  import dpd_pkg::*;

  for (genvar r = 0; r < N_ROWS; r++) begin : g_row
    acc_t acc;
    dpd_pe #(.DATA_W(DATA_W), .ACC_W(ACC_W)) u_pe (
      .clk, .en, .first, .init(fx_to_acc(b[r])), .a(x), .w(w[r]), .acc(acc));
    assign y[r] = requant(acc);
  end
endmodule
