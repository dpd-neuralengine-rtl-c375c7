// tb_dpd_hidden_pe_array: checks W_hh h + b_hh on the 30 x 4 hidden array.
// A random 30x10 matrix and 10-vector are fed as three 4-wide column chunks
// (columns past 9 as zero), then the lane-sum cycle; all 30 registered outputs
// are compared with a reference. Also checks the results are available in the
// cycle after `fin` (cycle 5 of the schedule) and hold until the next `fin`.
module tb_dpd_hidden_pe_array;
  import dpd_ref_pkg::*;
  localparam int R = 30, L = 4, C = 10;
  logic clk = 0;
  always #5 clk = ~clk;

  logic en, first, fin;
  logic signed [11:0] h [L];
  logic signed [11:0] w [R][L];
  logic signed [11:0] b [R];
  logic signed [11:0] y [R];
  int checks = 0, failures = 0;

  dpd_hidden_pe_array #(.N_ROWS(R), .LANES(L)) dut (.clk, .en, .first, .fin, .h, .w, .b, .y);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int W [R][C];
    int B [R];
    int H [C];
    int exp_y [R];
    longint s;
    en = 0; first = 0; fin = 0;
    for (int l = 0; l < L; l++) h[l] = 0;
    for (int r = 0; r < R; r++) begin b[r] = 0; for (int l = 0; l < L; l++) w[r][l] = 0; end
    @(negedge clk);
    for (int n = 0; n < 150; n++) begin
      int lim;
      lim = (n % 5 == 0) ? 2047 : 500;
      for (int c = 0; c < C; c++) H[c] = rnd(1024);
      for (int r = 0; r < R; r++) begin
        B[r] = rnd(lim);
        for (int c = 0; c < C; c++) W[r][c] = rnd(lim);
      end
      for (int k = 0; k < 3; k++) begin
        en = 1; first = (k == 0); fin = 0;
        for (int l = 0; l < L; l++) begin
          int c;
          c = k * L + l;
          h[l] = (c < C) ? 12'(H[c]) : 12'(rnd(2047));   // lanes past column 9 carry zero weight
          for (int r = 0; r < R; r++) w[r][l] = (c < C) ? 12'(W[r][c]) : 12'sd0;
        end
        for (int r = 0; r < R; r++) b[r] = 12'(rnd(2047));
        @(negedge clk);
      end
      en = 0; first = 0; fin = 1;
      for (int r = 0; r < R; r++) b[r] = 12'(B[r]);
      @(negedge clk);
      fin = 0;
      for (int r = 0; r < R; r++) begin
        s = longint'(B[r]) * 1024;
        for (int c = 0; c < C; c++) s += longint'(W[r][c]) * H[c];
        exp_y[r] = q(s);
      end
      // results must hold while the array idles
      repeat (1 + $urandom_range(2, 0)) begin
        for (int r = 0; r < R; r++) b[r] = 12'(rnd(2047));
        #1;
        for (int r = 0; r < R; r++) begin
          checks++;
          if (int'(y[r]) != exp_y[r]) begin
            failures++;
            if (failures < 10) $display("n=%0d row %0d: got %0d exp %0d", n, r, y[r], exp_y[r]);
          end
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
