// dpd_preprocessor: feature extraction, x_t = [I, Q, I^2+Q^2, (I^2+Q^2)^2].
//
// Two MAC PEs compute the amplitude features of one I/Q sample in three
// cycles (ctl.pre_step): step 0, PE0 forms I*I; step 1, PE0 adds Q*Q, giving
// |x|^2; step 2, PE1 squares the Q2.10 value of |x|^2, giving |x|^4. Both are
// floored and saturated to Q2.10.
//
// The input array consumes the features one per cycle in the order I, Q,
// |x|^2, |x|^4 (feat_sel = 0..3), so feature extraction overlaps the input
// matrix-vector product: I and Q go out straight away, |x|^2 is ready in the
// cycle after step 1 and |x|^4 in the cycle after step 2. `feat` is
// combinational from feat_sel. The use of two PEs follows the accelerator; how
// the work is split between them and the overlapped schedule are this
// design's choices. i_in and q_in must be held for the three steps.
module dpd_preprocessor (
  input  logic         clk,
  input  logic         en,
  input  logic [1:0]   step,
  input  logic [1:0]   feat_sel,
  input  dpd_pkg::fx_t i_in,
  input  dpd_pkg::fx_t q_in,
  output dpd_pkg::fx_t feat,
  output dpd_pkg::fx_t mag,
  output dpd_pkg::fx_t mag2
);
  import dpd_pkg::*;

  acc_t acc0, acc1;
  fx_t  a0;
  logic en0, en1;

  always_comb begin
    en0 = en && (step == 2'd0 || step == 2'd1);
    en1 = en && (step == 2'd2);
    a0  = (step == 2'd0) ? i_in : q_in;
  end

  // PE0: I*I, then + Q*Q
  dpd_pe #(.DATA_W(DATA_W), .ACC_W(ACC_W)) u_pe0 (
    .clk, .en(en0), .first(step == 2'd0), .init('0), .a(a0), .w(a0), .acc(acc0));

  assign mag = requant(acc0);

  // PE1: |x|^2 * |x|^2
  dpd_pe #(.DATA_W(DATA_W), .ACC_W(ACC_W)) u_pe1 (
    .clk, .en(en1), .first(1'b1), .init('0), .a(mag), .w(mag), .acc(acc1));

  assign mag2 = requant(acc1);

  always_comb begin
    unique case (feat_sel)
      2'd0:    feat = i_in;
      2'd1:    feat = q_in;
      2'd2:    feat = mag;
      default: feat = mag2;
    endcase
  end
endmodule
