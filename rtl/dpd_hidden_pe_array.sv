// dpd_hidden_pe_array: recurrent product W_hh h_{t-1} + b_hh for the r, z and n gates.
//
// N_ROWS x LANES MAC PEs (30 x 4 = 120). In each `en` cycle the hidden-state
// buffer supplies LANES consecutive elements of h_{t-1} (column chunk
// `hid_step`) and the weight buffer the matching LANES weights of every row;
// lane l of row r accumulates the products of columns l, l+4, l+8. Ten columns
// therefore take three cycles (columns past 9 are fed as zero). In the `fin`
// cycle the LANES partial sums of each row and the bias b_hh are added and the
// result is floored, saturated and registered as Q2.10 on y.
//
// Timing: `first`+`en` on cycle 1, `en` on cycles 2-3, `fin` on cycle 4, y
// valid from cycle 5 until the next `fin`. The split of the 156 PEs (120 here)
// and the lane adder are this design's choices, made so that the recurrent
// loop fits the 8-cycle sample period. The result is kept apart from the input
// array's because the reset gate multiplies only the n-gate part of it.
module dpd_hidden_pe_array #(
  parameter int N_ROWS = 30,
  parameter int LANES  = 4
) (
  input  logic         clk,
  input  logic         en,
  input  logic         first,
  input  logic         fin,
  input  dpd_pkg::fx_t h [LANES],
  input  dpd_pkg::fx_t w [N_ROWS][LANES],
  input  dpd_pkg::fx_t b [N_ROWS],
  output dpd_pkg::fx_t y [N_ROWS]
);
  import dpd_pkg::*;

  for (genvar r = 0; r < N_ROWS; r++) begin : g_row
    acc_t acc [LANES];
    acc_t sum;

    for (genvar l = 0; l < LANES; l++) begin : g_lane
      dpd_pe #(.DATA_W(DATA_W), .ACC_W(ACC_W)) u_pe (
        .clk, .en, .first, .init('0), .a(h[l]), .w(w[r][l]), .acc(acc[l]));
    end

    always_comb begin
      sum = fx_to_acc(b[r]);
      for (int l = 0; l < LANES; l++) sum += acc[l];
    end

    always_ff @(posedge clk) begin
      if (fin) y[r] <= requant(sum);
    end
  end
endmodule
