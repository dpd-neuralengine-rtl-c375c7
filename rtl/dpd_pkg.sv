// dpd_pkg: shared types, sizes and fixed-point helpers of the GRU-RNN DPD accelerator.
//
// All weights, activations and I/Q samples are 12-bit two's-complement Q2.10
// numbers (2 integer bits including the sign, 10 fractional bits), as the
// accelerator's number format prescribes. Products of two Q2.10 numbers carry
// 20 fractional bits and are accumulated at full precision in 32-bit
// accumulators; results are brought back to Q2.10 by an arithmetic right shift
// of 10 (floor) and saturation to [-2048, 2047] LSB. Floor and saturation are
// this design's choice: the format is given, the rounding rule is not.
//
// The network is a 4-feature, 10-unit, single-layer GRU followed by a 10x2
// fully connected layer: 502 parameters. The parameter address map of the
// weight buffer (row-major, gate order r, z, n) is this design's choice.
//
// The control word ctl_t is produced by dpd_control_fsm and distributed to
// every unit; see that module for the cycle schedule.
package dpd_pkg;

  // ---- number format ----
  localparam int DATA_W = 12;   // Q2.10
  localparam int FRAC_W = 10;
  localparam int ACC_W  = 32;   // accumulator, 20 fractional bits

  typedef logic signed [DATA_W-1:0] fx_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  localparam fx_t FX_MAX = fx_t'(12'sh7FF);
  localparam fx_t FX_MIN = fx_t'(12'sh800);
  localparam fx_t FX_ONE = fx_t'(12'sd1024);

  // ---- network shape ----
  localparam int N_IN   = 4;          // I, Q, |x|^2, |x|^4
  localparam int N_HID  = 10;         // GRU hidden units
  localparam int N_GATE = 3 * N_HID;  // rows of the r, z, n gates
  localparam int N_OUT  = 2;          // I_y, Q_y

  // ---- processing-element arrays (30 + 120 + 6 = 156 PEs, plus 2 in the preprocessor) ----
  localparam int N_PRE_PE  = 2;
  localparam int IN_LANES  = 1;                                   // PEs per input-array row
  localparam int HID_LANES = 4;                                   // PEs per hidden-array row
  localparam int FC_LANES  = 3;                                   // PEs per FC-array row
  localparam int IN_STEPS  = N_IN;                                // 4 cycles
  localparam int HID_STEPS = (N_HID + HID_LANES - 1) / HID_LANES; // 3 cycles
  localparam int FC_STEPS  = (N_HID + FC_LANES - 1) / FC_LANES;   // 4 cycles
  localparam int N_PE_ARRAY = N_GATE * IN_LANES + N_GATE * HID_LANES + N_OUT * FC_LANES;

  // ---- weight buffer address map ----
  localparam int A_WIH  = 0;                      // W_ih [30][4]
  localparam int A_WHH  = A_WIH + N_GATE * N_IN;  // W_hh [30][10]  = 120
  localparam int A_BIH  = A_WHH + N_GATE * N_HID; // b_ih [30]      = 420
  localparam int A_BHH  = A_BIH + N_GATE;         // b_hh [30]      = 450
  localparam int A_WFC  = A_BHH + N_GATE;         // W_fc [2][10]   = 480
  localparam int A_BFC  = A_WFC + N_OUT * N_HID;  // b_fc [2]       = 500
  localparam int N_PARAM = A_BFC + N_OUT;         // 502
  localparam int WADDR_W = $clog2(N_PARAM);       // 9

  // ---- timing ----
  localparam int SAMPLE_PERIOD = 8;   // cycles per I/Q sample: 2 GHz / 250 MSps
  localparam int LATENCY       = 15;  // cycles from accepted input to valid output: 7.5 ns at 2 GHz

  // Control word, one field group per unit. Steps index the column chunk in use.
  typedef struct packed {
    logic       pre_en;     // preprocessor PE active
    logic [1:0] pre_step;   // 0: I*I, 1: +Q*Q, 2: |x|^2 squared
    logic       in_en;      // input array MAC
    logic       in_first;
    logic [1:0] in_step;    // feature index 0..3
    logic       hid_en;     // hidden array MAC
    logic       hid_first;
    logic [1:0] hid_step;   // column chunk 0..2
    logic       hid_fin;    // hidden array lane sum + bias
    logic       act_s1;     // Sigmoid/Tanh stage 1: r, z
    logic       act_s2;     // stage 2: n
    logic       h_we;       // stage 3: write h_t into the hidden-state buffer
    logic       fc_en;      // FC array MAC
    logic       fc_first;
    logic [1:0] fc_step;    // column chunk 0..3
    logic       fc_sum;     // FC lane sum + bias
    logic       fc_q;       // FC requantise
    logic       out_en;     // output register load
  } ctl_t;

  // Saturate a value with 10 fractional bits to Q2.10.
  function automatic fx_t sat_fx(input acc_t v);
    if (v > acc_t'(FX_MAX)) return FX_MAX;
    if (v < acc_t'(FX_MIN)) return FX_MIN;
    return fx_t'(v);
  endfunction

  // Accumulator (20 fractional bits) to Q2.10: floor, then saturate.
  function automatic fx_t requant(input acc_t a);
    return sat_fx(a >>> FRAC_W);
  endfunction

  // Q2.10 value to accumulator scale (used to preload biases).
  function automatic acc_t fx_to_acc(input fx_t v);
    return acc_t'(v) <<< FRAC_W;
  endfunction

endpackage
