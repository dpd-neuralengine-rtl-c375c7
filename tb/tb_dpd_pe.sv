// tb_dpd_pe: self-checking test of the MAC processing element.
// Drives random operand sequences with random first/en patterns (including
// extreme operands) and compares the accumulator each cycle with a sum kept
// in the testbench.
module tb_dpd_pe;
  import dpd_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  logic en, first;
  logic signed [31:0] init, acc;
  logic signed [11:0] a, w;
  longint model;
  int checks = 0, failures = 0;

  dpd_pe #(.DATA_W(12), .ACC_W(32)) dut (.clk, .en, .first, .init, .a, .w, .acc);

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 1; first = 1; init = 0; a = 0; w = 0;
    @(negedge clk);
    model = 0;
    for (int n = 0; n < 2000; n++) begin
      en    = (n < 4) || ($urandom_range(3, 0) != 0);
      first = (n == 0) || ($urandom_range(7, 0) == 0);
      init  = 32'(rnd(4096) * 1024);
      if (n % 50 == 7) begin a = -12'sd2048; w = -12'sd2048; end
      else begin a = 12'(rnd(2048)); w = 12'(rnd(2048)); end
      if (en) model = (first ? longint'(init) : model) + longint'(a) * longint'(w);
      @(negedge clk);
      checks++;
      if (longint'(acc) != model) begin
        failures++;
        if (failures < 10) $display("mismatch n=%0d acc=%0d exp=%0d", n, acc, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
