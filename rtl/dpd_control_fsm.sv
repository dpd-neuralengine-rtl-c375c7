// dpd_control_fsm: central controller; fixed cycle schedule for each I/Q sample.
//
// The datapath has no data-dependent timing, so the controller is a token
// pipeline: when a sample is accepted (in_valid && in_ready, cycle 0) a token
// enters tok[1] and moves one place per cycle; tok[k] set means "a sample
// accepted k cycles ago". Every unit's enable and column step is decoded from
// the token positions:
//   cycle 1-3   preprocessor steps 0-2
//   cycle 1-4   input array MAC, feature 0-3 (bias loaded on cycle 1)
//   cycle 1-3   hidden array MAC, column chunk 0-2;  cycle 4 lane sum + bias
//   cycle 5     Sigmoid/Tanh stage 1 (r, z)
//   cycle 6     Sigmoid/Tanh stage 2 (n)
//   cycle 7     stage 3: h_t written into the hidden-state buffer
//   cycle 8-11  FC array MAC, column chunk 0-3
//   cycle 12    FC lane sum + bias;  cycle 13 FC requantise
//   cycle 14    output register load  -> out_valid in cycle 15 (LATENCY)
// A new sample is accepted only when no token sits in tok[1..7], i.e. at most
// one sample per SAMPLE_PERIOD = 8 cycles. With that spacing a sample's
// hidden-array pass (cycles 9-11 of the previous sample's count) starts after
// the previous h_t was written (cycle 7), and no unit is claimed by two
// samples in the same cycle, so two samples overlap safely.
//
// State: IDLE when no sample is in flight, RUN otherwise (reported on busy).
// The central FSM follows the accelerator; the schedule itself is this
// design's, chosen for the 8-cycle period (2 GHz / 250 MSps) and the 15-cycle
// latency (7.5 ns at 2 GHz).
module dpd_control_fsm (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  output logic          busy,
  output dpd_pkg::ctl_t ctl
);
  import dpd_pkg::*;
  // SAMPLE_PERIOD (8) and LATENCY (15) come from dpd_pkg; the decode below is
  // written for those values.

  typedef enum logic {IDLE, RUN} state_e;
  state_e state;

  logic [LATENCY-1:1] tok;
  logic               accept;

  always_comb begin
    in_ready = (tok[SAMPLE_PERIOD-1:1] == '0);
    accept   = in_valid && in_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tok   <= '0;
      state <= IDLE;
    end else begin
      tok   <= {tok[LATENCY-2:1], accept};
      state <= (accept || tok[LATENCY-2:1] != '0) ? RUN : IDLE;
    end
  end

  assign busy = (state == RUN);

  function automatic logic [1:0] step_of(input logic t1, input logic t2, input logic t3);
    return t1 ? 2'd1 : t2 ? 2'd2 : t3 ? 2'd3 : 2'd0;
  endfunction

  always_comb begin
    ctl           = '0;
    ctl.pre_en    = tok[1] | tok[2] | tok[3];
    ctl.pre_step  = step_of(tok[2], tok[3], 1'b0);
    ctl.in_en     = tok[1] | tok[2] | tok[3] | tok[4];
    ctl.in_first  = tok[1];
    ctl.in_step   = step_of(tok[2], tok[3], tok[4]);
    ctl.hid_en    = tok[1] | tok[2] | tok[3];
    ctl.hid_first = tok[1];
    ctl.hid_step  = step_of(tok[2], tok[3], 1'b0);
    ctl.hid_fin   = tok[4];
    ctl.act_s1    = tok[5];
    ctl.act_s2    = tok[6];
    ctl.h_we      = tok[7];
    ctl.fc_en     = tok[8] | tok[9] | tok[10] | tok[11];
    ctl.fc_first  = tok[8];
    ctl.fc_step   = step_of(tok[9], tok[10], tok[11]);
    ctl.fc_sum    = tok[12];
    ctl.fc_q      = tok[13];
    ctl.out_en    = tok[14];
  end

  // The decode above is written for these sizes; stop elaboration if the
  // package is changed without rewriting the schedule.
  if (IN_STEPS != 4 || HID_STEPS != 3 || FC_STEPS != 4 || SAMPLE_PERIOD != 8 || LATENCY != 15) begin : g_size_check
      $error("dpd_control_fsm: schedule written for 4/3/4 column steps, period 8, latency 15");
  end

  // At most one sample in any 8-cycle window of the schedule.
  a_spacing: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0(tok[SAMPLE_PERIOD:1]))
    else $error("two samples closer than SAMPLE_PERIOD");
endmodule
