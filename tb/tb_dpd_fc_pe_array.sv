// tb_dpd_fc_pe_array: checks [I_y, Q_y] = W_fc h + b_fc on the 2 x 3 FC array.
// Four 3-wide column chunks (columns past 9 as zero), then the lane-sum and
// requantise cycles; the outputs are compared with a reference and must
// change only on the requantise cycle.
module tb_dpd_fc_pe_array;
  import dpd_ref_pkg::*;
  localparam int O = 2, L = 3, C = 10;
  logic clk = 0;
  always #5 clk = ~clk;

  logic en, first, sum_en, q_en;
  logic signed [11:0] h [L];
  logic signed [11:0] w [O][L];
  logic signed [11:0] b [O];
  logic signed [11:0] y [O];
  int checks = 0, failures = 0, sats = 0;

  dpd_fc_pe_array #(.N_OUT(O), .LANES(L)) dut (.clk, .en, .first, .sum_en, .q_en, .h, .w, .b, .y);

  task automatic chk(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("%s: got %0d exp %0d", what, got, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int W [O][C];
    int B [O];
    int H [C];
    int exp_y [O], prev_y [O];
    longint s;
    en = 0; first = 0; sum_en = 0; q_en = 0;
    for (int l = 0; l < L; l++) h[l] = 0;
    for (int o = 0; o < O; o++) begin b[o] = 0; prev_y[o] = 0; for (int l = 0; l < L; l++) w[o][l] = 0; end
    // establish a known output
    q_en = 0;
    @(negedge clk);
    for (int n = 0; n < 300; n++) begin
      int lim;
      lim = (n % 4 == 0) ? 2047 : 400;
      for (int c = 0; c < C; c++) H[c] = rnd(1024);
      for (int o = 0; o < O; o++) begin
        B[o] = rnd(lim);
        for (int c = 0; c < C; c++) W[o][c] = rnd(lim);
      end
      for (int k = 0; k < 4; k++) begin
        en = 1; first = (k == 0);
        for (int l = 0; l < L; l++) begin
          int c;
          c = k * L + l;
          h[l] = (c < C) ? 12'(H[c]) : 12'sd0;
          for (int o = 0; o < O; o++) w[o][l] = (c < C) ? 12'(W[o][c]) : 12'sd0;
        end
        @(negedge clk);
        if (n > 0) for (int o = 0; o < O; o++) chk(int'(y[o]), prev_y[o], "hold");
      end
      en = 0; first = 0; sum_en = 1;
      for (int o = 0; o < O; o++) b[o] = 12'(B[o]);
      @(negedge clk);
      sum_en = 0; q_en = 1;
      for (int o = 0; o < O; o++) b[o] = 12'(rnd(2047));
      if (n > 0) for (int o = 0; o < O; o++) chk(int'(y[o]), prev_y[o], "hold before q");
      @(negedge clk);
      q_en = 0;
      for (int o = 0; o < O; o++) begin
        s = longint'(B[o]) * 1024;
        for (int c = 0; c < C; c++) s += longint'(W[o][c]) * H[c];
        exp_y[o] = q(s);
        if (exp_y[o] == 2047 || exp_y[o] == -2048) sats++;
        chk(int'(y[o]), exp_y[o], "y");
        prev_y[o] = exp_y[o];
      end
    end
    checks++;
    if (sats == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
