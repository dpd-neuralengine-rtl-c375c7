// tb_dpd_hardsigmoid: exhaustive check of the hard sigmoid over every 14-bit
// input against the reference y = clamp(floor(x/4) + 1/2, 0, 1).
module tb_dpd_hardsigmoid;
  import dpd_ref_pkg::*;
  logic signed [13:0] x;
  logic signed [11:0] y;
  int checks = 0, failures = 0;

  dpd_hardsigmoid #(.IN_W(14)) dut (.x, .y);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -8192; v < 8192; v++) begin
      x = 14'(v);
      #1;
      checks++;
      if (int'(y) != hsig(v)) begin
        failures++;
        if (failures < 10) $display("x=%0d y=%0d exp=%0d", v, y, hsig(v));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
