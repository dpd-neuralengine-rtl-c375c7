// dpd_weight_buffer: storage for the 502 Q2.10 model parameters.
//
// A register file written one parameter per cycle (we, waddr, wdata) and read
// by all three PE arrays at once. Address map (row-major, gate rows r, z, n):
//   0-119 W_ih[30][4], 120-419 W_hh[30][10], 420-449 b_ih, 450-479 b_hh,
//   480-499 W_fc[2][10], 500-501 b_fc.
// Each cycle the control steps select which column the arrays see:
//   w_in[r]      = W_ih[r][in_step]
//   w_hid[r][l]  = W_hh[r][HID_LANES*hid_step + l]   (0 past column 9)
//   w_fc[o][l]   = W_fc[o][FC_LANES*fc_step + l]     (0 past column 9)
// Biases are presented in parallel all the time. Reads are combinational;
// writes take effect on the next cycle. Writes to addresses >= 502 are ignored.
//
// The buffer's existence and role follow the accelerator. Flip-flop storage,
// the write port and the address map are this design's choices. Contents are
// not reset and must be loaded before samples are processed.
module dpd_weight_buffer (
  input  logic                        clk,
  input  logic                        we,
  input  logic [dpd_pkg::WADDR_W-1:0] waddr,
  input  dpd_pkg::fx_t                wdata,
  input  logic [1:0]                  in_step,
  input  logic [1:0]                  hid_step,
  input  logic [1:0]                  fc_step,
  output dpd_pkg::fx_t                w_in  [dpd_pkg::N_GATE],
  output dpd_pkg::fx_t                w_hid [dpd_pkg::N_GATE][dpd_pkg::HID_LANES],
  output dpd_pkg::fx_t                w_fc  [dpd_pkg::N_OUT][dpd_pkg::FC_LANES],
  output dpd_pkg::fx_t                b_ih  [dpd_pkg::N_GATE],
  output dpd_pkg::fx_t                b_hh  [dpd_pkg::N_GATE],
  output dpd_pkg::fx_t                b_fc  [dpd_pkg::N_OUT]
);
  import dpd_pkg::*;

  fx_t mem [N_PARAM];

  always_ff @(posedge clk) begin
    if (we && int'(waddr) < N_PARAM) mem[waddr] <= wdata;
  end

  always_comb begin
    for (int r = 0; r < N_GATE; r++) begin
      w_in[r] = mem[A_WIH + r*N_IN + int'(in_step)];
      b_ih[r] = mem[A_BIH + r];
      b_hh[r] = mem[A_BHH + r];
      for (int l = 0; l < HID_LANES; l++) begin
        int col;
        col = HID_LANES*int'(hid_step) + l;
        w_hid[r][l] = (col < N_HID) ? mem[A_WHH + r*N_HID + col] : '0;
      end
    end
    for (int o = 0; o < N_OUT; o++) begin
      b_fc[o] = mem[A_BFC + o];
      for (int l = 0; l < FC_LANES; l++) begin
        int col;
        col = FC_LANES*int'(fc_step) + l;
        w_fc[o][l] = (col < N_HID) ? mem[A_WFC + o*N_HID + col] : '0;
      end
    end
  end
endmodule
