// tb_dpd_preprocessor: checks the feature extraction on random and extreme
// I/Q samples. For each sample the three preprocessor steps are run; the
// feature output is checked in the order the input array reads it (I, Q,
// |x|^2 after step 1, |x|^4 after step 2), and it takes exactly three steps.
module tb_dpd_preprocessor;
  import dpd_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  logic en;
  logic [1:0] step, feat_sel;
  logic signed [11:0] i_in, q_in, feat, mag, mag2;
  int checks = 0, failures = 0;

  dpd_preprocessor dut (.clk, .en, .step, .feat_sel, .i_in, .q_in, .feat, .mag, .mag2);

  task automatic chk(input string what, input int got, input int exp);
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
    int iv, qv, m, m2;
    en = 0; step = 0; feat_sel = 0; i_in = 0; q_in = 0;
    @(negedge clk);
    for (int n = 0; n < 500; n++) begin
      case (n)
        0: begin iv = -2048; qv = -2048; end   // |x|^2 saturates
        1: begin iv = 2047;  qv = 0;     end
        2: begin iv = 0;     qv = 0;     end
        default: begin iv = rnd(n % 3 == 0 ? 2048 : 900); qv = rnd(n % 3 == 0 ? 2048 : 900); end
      endcase
      if (iv > 2047) iv = 2047;
      if (qv > 2047) qv = 2047;
      m  = q(longint'(iv) * iv + longint'(qv) * qv);
      m2 = q(longint'(m) * m);
      i_in = 12'(iv); q_in = 12'(qv);
      // cycle 1: step 0, feature I
      en = 1; step = 0; feat_sel = 0;
      #1 chk("feat I", int'(feat), iv);
      @(negedge clk);
      // cycle 2: step 1, feature Q
      step = 1; feat_sel = 1;
      #1 chk("feat Q", int'(feat), qv);
      @(negedge clk);
      // cycle 3: step 2, feature |x|^2
      step = 2; feat_sel = 2;
      #1 chk("feat mag", int'(feat), m);
      @(negedge clk);
      // cycle 4: feature |x|^4
      en = 0; step = 0; feat_sel = 3;
      #1 chk("feat mag2", int'(feat), m2);
      chk("mag", int'(mag), m);
      // random idle cycles, the preprocessor must hold its results
      repeat ($urandom_range(2, 0)) @(negedge clk);
      #1 chk("mag2 hold", int'(mag2), m2);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
