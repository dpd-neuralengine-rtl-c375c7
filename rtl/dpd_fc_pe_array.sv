// dpd_fc_pe_array: output layer [I_y, Q_y] = W_fc h_t + b_fc.
//
// N_OUT x LANES MAC PEs (2 x 3 = 6). Each `en` cycle the hidden-state buffer
// supplies LANES consecutive elements of h_t (column chunk `fc_step`) and the
// weight buffer the matching weights; ten columns take four cycles (columns
// past 9 are fed as zero). In the `sum_en` cycle the lane partial sums and the
// bias b_fc are added into a full-precision register; in the `q_en` cycle
// that sum is floored and saturated to Q2.10 and registered on y.
//
// Timing: `en` on cycles 8-11 of a sample, `sum_en` on 12, `q_en` on 13, y
// valid from 14. The 6-PE size, the lane adder and the two-stage tail are this
// design's choices (the tail keeps the adder and the saturation in separate
// cycles and brings the sample latency to 15 cycles).
module dpd_fc_pe_array #(
  parameter int N_OUT = 2,
  parameter int LANES = 3
) (
  input  logic         clk,
  input  logic         en,
  input  logic         first,
  input  logic         sum_en,
  input  logic         q_en,
  input  dpd_pkg::fx_t h [LANES],
  input  dpd_pkg::fx_t w [N_OUT][LANES],
  input  dpd_pkg::fx_t b [N_OUT],
  output dpd_pkg::fx_t y [N_OUT]
);
  import dpd_pkg::*;

  for (genvar o = 0; o < N_OUT; o++) begin : g_out
    acc_t acc [LANES];
    acc_t sum, sum_q;

    for (genvar l = 0; l < LANES; l++) begin : g_lane
      dpd_pe #(.DATA_W(DATA_W), .ACC_W(ACC_W)) u_pe (
        .clk, .en, .first, .init('0), .a(h[l]), .w(w[o][l]), .acc(acc[l]));
    end

    always_comb begin
      sum = fx_to_acc(b[o]);
      for (int l = 0; l < LANES; l++) sum += acc[l];
    end

    always_ff @(posedge clk) begin
      if (sum_en) sum_q <= sum;
      if (q_en)   y[o]  <= requant(sum_q);
    end
  end
endmodule
