// dpd_sigmoid_tanh_unit: GRU gate nonlinearities and state update for all hidden units.
//
// Inputs are the Q2.10 row results of the input array (gi = W_ih x + b_ih)
// and the hidden array (gh = W_hh h + b_hh), rows ordered r (0-9), z (10-19),
// n (20-29), and the previous state h_prev. Ten lanes work in parallel, one per
// hidden unit j:
//   stage 1 (s1_en):  r = hardsigmoid(gi_r + gh_r), z = hardsigmoid(gi_z + gh_z);
//                     gi_n and gh_n are registered alongside.
//   stage 2 (s2_en):  n = hardtanh(gi_n + r * gh_n)
//   stage 3 (comb.):  h_new = n + z * (h_prev - n)  = (1 - z) n + z h_prev
// Stages 1 and 2 are registered; h_new is combinational from the stage-2
// registers and h_prev, and the hidden-state buffer captures it at the end of
// the stage-3 cycle. Products are floored to 10 fractional bits and h_new is
// saturated to Q2.10.
//
// The hard sigmoid/tanh follow the accelerator. Where the element-wise
// multiplies sit (here, one pair of multipliers per hidden unit in this unit),
// the pipeline split and the h = n + z(h_prev - n) form are this design's
// choices.
module dpd_sigmoid_tanh_unit #(
  parameter int N_HID = 10
) (
  input  logic         clk,
  input  logic         s1_en,
  input  logic         s2_en,
  input  dpd_pkg::fx_t gi     [3*N_HID],
  input  dpd_pkg::fx_t gh     [3*N_HID],
  input  dpd_pkg::fx_t h_prev [N_HID],
  output dpd_pkg::fx_t h_new  [N_HID]
);
  import dpd_pkg::*;
  localparam int PW = 14;   // pre-activation width, 10 fractional bits

  for (genvar j = 0; j < N_HID; j++) begin : g_unit
    logic signed [PW-1:0]       pre_r, pre_z, pre_n;
    fx_t                        r_c, z_c, n_c;
    fx_t                        r_q, z_q, gin_q, ghn_q, n_q;
    logic signed [2*DATA_W-1:0] rn_prod;
    logic signed [DATA_W:0]     d;
    logic signed [2*DATA_W:0]   zd_prod;
    acc_t                       h_sum;

    // stage 1: reset and update gates
    always_comb begin
      pre_r = PW'(gi[j])         + PW'(gh[j]);
      pre_z = PW'(gi[N_HID + j]) + PW'(gh[N_HID + j]);
    end
    dpd_hardsigmoid #(.IN_W(PW)) u_sig_r (.x(pre_r), .y(r_c));
    dpd_hardsigmoid #(.IN_W(PW)) u_sig_z (.x(pre_z), .y(z_c));

    always_ff @(posedge clk) begin
      if (s1_en) begin
        r_q   <= r_c;
        z_q   <= z_c;
        gin_q <= gi[2*N_HID + j];
        ghn_q <= gh[2*N_HID + j];
      end
    end

    // stage 2: candidate state
    always_comb begin
      rn_prod = r_q * ghn_q;
      pre_n   = PW'(gin_q) + PW'(rn_prod >>> FRAC_W);
    end
    dpd_hardtanh #(.IN_W(PW)) u_tanh (.x(pre_n), .y(n_c));

    always_ff @(posedge clk) begin
      if (s2_en) n_q <= n_c;
    end

    // stage 3: state update
    always_comb begin
      d        = (DATA_W+1)'(h_prev[j]) - (DATA_W+1)'(n_q);
      zd_prod  = z_q * d;
      h_sum    = acc_t'(n_q) + (acc_t'(zd_prod) >>> FRAC_W);
      h_new[j] = sat_fx(h_sum);
    end
  end
endmodule
