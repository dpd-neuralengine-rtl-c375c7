// tb_dpd_control_fsm: checks the controller's schedule.
// in_valid is driven with bursts of continuous requests and random gaps. The
// testbench keeps the ages of accepted samples and, every cycle, compares
// in_ready and every control field with the schedule (preprocessor 1-3, input
// array 1-4, hidden array 1-3 + sum 4, Sigmoid/Tanh 5-7, FC 8-11, 12, 13,
// output load 14). Under continuous requests samples must be accepted exactly
// every 8 cycles.
module tb_dpd_control_fsm;
  import dpd_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, in_valid, in_ready, busy;
  ctl_t ctl;
  int checks = 0, failures = 0;
  int last_acc = -100, cyc = 0, b2b = 0;
  bit age [0:15];

  dpd_control_fsm dut (.clk, .rst_n, .in_valid, .in_ready, .busy, .ctl);

  task automatic chk(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("cycle %0d %s: got %0d exp %0d", cyc, what, got, exp);
    end
  endtask

  function automatic int stp(input int a, input int lo, input int hi);
    for (int k = lo; k <= hi; k++) if (age[k]) return k - lo;
    return 0;
  endfunction

  function automatic bit any(input int lo, input int hi);
    for (int k = lo; k <= hi; k++) if (age[k]) return 1;
    return 0;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 16; k++) age[k] = 0;
    rst_n = 0; in_valid = 0;
    #12 rst_n = 1;
    @(negedge clk);
    for (cyc = 0; cyc < 3000; cyc++) begin
      if ((cyc / 100) % 2 == 0) in_valid = 1;
      else in_valid = ($urandom_range(9, 0) == 0);
      #1;
      chk(int'(in_ready), int'(!any(1, 7)), "in_ready");
      chk(int'(busy), int'(any(1, 14)), "busy");
      chk(int'(ctl.pre_en), int'(any(1, 3)), "pre_en");
      if (any(1, 3)) chk(int'(ctl.pre_step), stp(0, 1, 3), "pre_step");
      chk(int'(ctl.in_en), int'(any(1, 4)), "in_en");
      chk(int'(ctl.in_first), int'(age[1]), "in_first");
      if (any(1, 4)) chk(int'(ctl.in_step), stp(0, 1, 4), "in_step");
      chk(int'(ctl.hid_en), int'(any(1, 3)), "hid_en");
      chk(int'(ctl.hid_first), int'(age[1]), "hid_first");
      if (any(1, 3)) chk(int'(ctl.hid_step), stp(0, 1, 3), "hid_step");
      chk(int'(ctl.hid_fin), int'(age[4]), "hid_fin");
      chk(int'(ctl.act_s1), int'(age[5]), "act_s1");
      chk(int'(ctl.act_s2), int'(age[6]), "act_s2");
      chk(int'(ctl.h_we), int'(age[7]), "h_we");
      chk(int'(ctl.fc_en), int'(any(8, 11)), "fc_en");
      chk(int'(ctl.fc_first), int'(age[8]), "fc_first");
      if (any(8, 11)) chk(int'(ctl.fc_step), stp(0, 8, 11), "fc_step");
      chk(int'(ctl.fc_sum), int'(age[12]), "fc_sum");
      chk(int'(ctl.fc_q), int'(age[13]), "fc_q");
      chk(int'(ctl.out_en), int'(age[14]), "out_en");
      // advance the model
      for (int k = 15; k > 0; k--) age[k] = age[k-1];
      age[1] = in_valid && in_ready;
      if (in_valid && in_ready) begin
        if ((cyc / 100) % 2 == 0 && last_acc >= (cyc / 100) * 100) begin
          chk(cyc - last_acc, SAMPLE_PERIOD, "back-to-back period");
          b2b++;
        end
        last_acc = cyc;
      end
      @(negedge clk);
    end
    checks++;
    if (b2b < 10) begin failures++; $display("too few back-to-back samples"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
