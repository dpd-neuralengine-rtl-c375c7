// dpd_hidden_state_buffer: the GRU hidden state h (10 x Q2.10).
//
// Holds h_{t-1} between samples. It serves the hidden array LANES-wide column
// chunks (h_hid[l] = h[HID_LANES*hid_step + l]), the FC array its chunks
// (h_fc[l] = h[FC_LANES*fc_step + l]), both zero past element 9, and the whole
// vector to the Sigmoid/Tanh unit. `we` loads h_t at the end of the cycle in
// which the Sigmoid/Tanh unit presents it; `clr` (synchronous) and rst_n
// (asynchronous, active low) zero the state, `clr` taking priority over `we`.
// Reads are combinational.
//
// The buffer follows the accelerator; zero initial state and the clear input
// are this design's choices.
module dpd_hidden_state_buffer (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         we,
  input  dpd_pkg::fx_t h_new [dpd_pkg::N_HID],
  input  logic [1:0]   hid_step,
  input  logic [1:0]   fc_step,
  output dpd_pkg::fx_t h_hid [dpd_pkg::HID_LANES],
  output dpd_pkg::fx_t h_fc  [dpd_pkg::FC_LANES],
  output dpd_pkg::fx_t h_all [dpd_pkg::N_HID]
);
  import dpd_pkg::*;

  fx_t h [N_HID];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < N_HID; j++) h[j] <= '0;
    end else if (clr) begin
      for (int j = 0; j < N_HID; j++) h[j] <= '0;
    end else if (we) begin
      h <= h_new;
    end
  end

  always_comb begin
    h_all = h;
    for (int l = 0; l < HID_LANES; l++) begin
      int col;
      col = HID_LANES*int'(hid_step) + l;
      h_hid[l] = (col < N_HID) ? h[col] : '0;
    end
    for (int l = 0; l < FC_LANES; l++) begin
      int col;
      col = FC_LANES*int'(fc_step) + l;
      h_fc[l] = (col < N_HID) ? h[col] : '0;
    end
  end
endmodule
