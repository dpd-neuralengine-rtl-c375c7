// tb_dpd_input_pe_array: checks W_ih x + b_ih on the 30-row input array.
// Random weights, biases and feature vectors are streamed one feature per
// cycle for four cycles; all 30 outputs are compared with a reference
// dot product. Large operands exercise the output saturation.
module tb_dpd_input_pe_array;
  import dpd_ref_pkg::*;
  localparam int R = 30;
  logic clk = 0;
  always #5 clk = ~clk;

  logic en, first;
  logic signed [11:0] x;
  logic signed [11:0] w [R];
  logic signed [11:0] b [R];
  logic signed [11:0] y [R];
  int checks = 0, failures = 0, sats = 0;

  dpd_input_pe_array #(.N_ROWS(R)) dut (.clk, .en, .first, .x, .w, .b, .y);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int W [R][4];
    int B [R];
    int X [4];
    longint s;
    en = 0; first = 0; x = 0;
    for (int r = 0; r < R; r++) begin w[r] = 0; b[r] = 0; end
    @(negedge clk);
    for (int n = 0; n < 200; n++) begin
      int lim;
      lim = (n % 4 == 0) ? 2048 : 600;
      for (int r = 0; r < R; r++) begin
        B[r] = rnd(lim);
        for (int k = 0; k < 4; k++) W[r][k] = rnd(lim);
        if (B[r] > 2047) B[r] = 2047;
        for (int k = 0; k < 4; k++) if (W[r][k] > 2047) W[r][k] = 2047;
      end
      for (int k = 0; k < 4; k++) begin X[k] = rnd(2047); end
      for (int k = 0; k < 4; k++) begin
        en = 1; first = (k == 0); x = 12'(X[k]);
        for (int r = 0; r < R; r++) begin w[r] = 12'(W[r][k]); b[r] = 12'(B[r]); end
        @(negedge clk);
      end
      en = 0; first = 0;
      for (int r = 0; r < R; r++) b[r] = 12'(rnd(2047));  // bias only matters on the first cycle
      #1;
      for (int r = 0; r < R; r++) begin
        s = longint'(B[r]) * 1024;
        for (int k = 0; k < 4; k++) s += longint'(W[r][k]) * X[k];
        checks++;
        if (q(s) == 2047 || q(s) == -2048) sats++;
        if (int'(y[r]) != q(s)) begin
          failures++;
          if (failures < 10) $display("n=%0d row %0d: got %0d exp %0d", n, r, y[r], q(s));
        end
      end
      @(negedge clk);
    end
    checks++;
    if (sats == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
