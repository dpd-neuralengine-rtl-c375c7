// dpd_neural_engine: GRU-RNN digital pre-distortion accelerator (top level).
//
// Takes a stream of 12-bit Q2.10 I/Q baseband samples and returns the
// pre-distorted I/Q stream computed by a 4-feature, 10-unit GRU with a 10x2
// linear output layer:
//   x_t = [I, Q, I^2+Q^2, (I^2+Q^2)^2]
//   r = hsig(W_ir x + b_ir + W_hr h + b_hr)      z = hsig(W_iz x + b_iz + W_hz h + b_hz)
//   n = htanh(W_in x + b_in + r * (W_hn h + b_hn))
//   h_t = (1 - z) n + z h_{t-1}                   [I_y, Q_y] = W_fc h_t + b_fc
// Blocks: preprocessor (2 PEs), input PE array (30 PEs), hidden PE array
// (120 PEs), FC PE array (6 PEs), Sigmoid/Tanh unit, weight buffer, hidden-
// state buffer and the control FSM, connected as in the accelerator's block
// diagram: the weight buffer feeds all three arrays, the preprocessor feeds the
// input array, the hidden-state buffer feeds the hidden and FC arrays, the
// input and hidden arrays feed the Sigmoid/Tanh unit, which writes the
// hidden-state buffer.
//
// Interface: in_valid/in_ready handshake; one sample is accepted at most every
// SAMPLE_PERIOD = 8 cycles (250 MSps at 2 GHz). out_valid pulses for one cycle
// with I_y/Q_y LATENCY = 15 cycles after the sample was accepted, and the
// outputs hold until the next result. Parameters are written through w_we /
// w_addr / w_data (map in dpd_pkg) before use; state_clr zeroes the hidden
// state (start of a new signal). rst_n is asynchronous, active low.
//
// Follows the accelerator: the block set, the PE count (2 + 156), the number
// format, the hard activations, the rate and the latency. This design's own
// choices: how the 156 PEs are split between the arrays, the cycle schedule,
// the rounding rule, the load/clear ports and the registers at the I/Q
// boundary (which the block diagram marks with unlabelled boxes).
module dpd_neural_engine (
  input  logic                        clk,
  input  logic                        rst_n,
  // I/Q sample input
  input  logic                        in_valid,
  output logic                        in_ready,
  input  dpd_pkg::fx_t                in_i,
  input  dpd_pkg::fx_t                in_q,
  // pre-distorted output
  output logic                        out_valid,
  output dpd_pkg::fx_t                out_i,
  output dpd_pkg::fx_t                out_q,
  // configuration
  input  logic                        state_clr,
  input  logic                        w_we,
  input  logic [dpd_pkg::WADDR_W-1:0] w_addr,
  input  dpd_pkg::fx_t                w_data,
  output logic                        busy
);
  import dpd_pkg::*;

  ctl_t ctl;

  // 156 array PEs plus the 2 preprocessor PEs.
  if (N_PE_ARRAY != 156 || N_PRE_PE != 2) begin : g_size_check
      $error("dpd_neural_engine: PE count differs from 156 + 2");
  end

  // ---------------- control ----------------
  dpd_control_fsm u_ctrl (.clk, .rst_n, .in_valid, .in_ready, .busy, .ctl);

  // ---------------- input boundary register ----------------
  fx_t i_reg, q_reg;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i_reg <= '0;
      q_reg <= '0;
    end else if (in_valid && in_ready) begin
      i_reg <= in_i;
      q_reg <= in_q;
    end
  end

  // ---------------- buffers ----------------
  fx_t w_in  [N_GATE];
  fx_t w_hid [N_GATE][HID_LANES];
  fx_t w_fc  [N_OUT][FC_LANES];
  fx_t b_ih  [N_GATE];
  fx_t b_hh  [N_GATE];
  fx_t b_fc  [N_OUT];

  dpd_weight_buffer u_wbuf (
    .clk, .we(w_we), .waddr(w_addr), .wdata(w_data),
    .in_step(ctl.in_step), .hid_step(ctl.hid_step), .fc_step(ctl.fc_step),
    .w_in, .w_hid, .w_fc, .b_ih, .b_hh, .b_fc);

  fx_t h_new [N_HID];
  fx_t h_hid [HID_LANES];
  fx_t h_fc  [FC_LANES];
  fx_t h_all [N_HID];

  dpd_hidden_state_buffer u_hbuf (
    .clk, .rst_n, .clr(state_clr), .we(ctl.h_we), .h_new,
    .hid_step(ctl.hid_step), .fc_step(ctl.fc_step), .h_hid, .h_fc, .h_all);

  // ---------------- preprocessor ----------------
  fx_t feat, mag, mag2;

  dpd_preprocessor u_pre (
    .clk, .en(ctl.pre_en), .step(ctl.pre_step), .feat_sel(ctl.in_step),
    .i_in(i_reg), .q_in(q_reg), .feat, .mag, .mag2);

  // ---------------- PE arrays ----------------
  fx_t gi [N_GATE];
  fx_t gh [N_GATE];
  fx_t y  [N_OUT];

  dpd_input_pe_array #(.N_ROWS(N_GATE)) u_in_arr (
    .clk, .en(ctl.in_en), .first(ctl.in_first), .x(feat), .w(w_in), .b(b_ih), .y(gi));

  dpd_hidden_pe_array #(.N_ROWS(N_GATE), .LANES(HID_LANES)) u_hid_arr (
    .clk, .en(ctl.hid_en), .first(ctl.hid_first), .fin(ctl.hid_fin),
    .h(h_hid), .w(w_hid), .b(b_hh), .y(gh));

  dpd_fc_pe_array #(.N_OUT(N_OUT), .LANES(FC_LANES)) u_fc_arr (
    .clk, .en(ctl.fc_en), .first(ctl.fc_first), .sum_en(ctl.fc_sum), .q_en(ctl.fc_q),
    .h(h_fc), .w(w_fc), .b(b_fc), .y);

  // ---------------- nonlinear functions and state update ----------------
  dpd_sigmoid_tanh_unit #(.N_HID(N_HID)) u_act (
    .clk, .s1_en(ctl.act_s1), .s2_en(ctl.act_s2), .gi, .gh, .h_prev(h_all), .h_new);

  // ---------------- output boundary register ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_i     <= '0;
      out_q     <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= ctl.out_en;
      if (ctl.out_en) begin
        out_i <= y[0];
        out_q <= y[1];
      end
    end
  end
endmodule
