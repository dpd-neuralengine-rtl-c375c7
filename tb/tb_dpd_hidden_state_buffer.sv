// tb_dpd_hidden_state_buffer: checks state writes, the synchronous clear and
// its priority over a write, the asynchronous reset, and the chunked read
// ports for the hidden array (4 wide) and the FC array (3 wide).
module tb_dpd_hidden_state_buffer;
  import dpd_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, clr, we;
  logic signed [11:0] h_new [10];
  logic [1:0] hid_step, fc_step;
  logic signed [11:0] h_hid [4];
  logic signed [11:0] h_fc [3];
  logic signed [11:0] h_all [10];
  int checks = 0, failures = 0;
  int H [10];

  dpd_hidden_state_buffer dut (.clk, .rst_n, .clr, .we, .h_new, .hid_step, .fc_step, .h_hid, .h_fc, .h_all);

  task automatic chk(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("%s: got %0d exp %0d", what, got, exp);
    end
  endtask

  task automatic check_all();
    for (int s = 0; s < 4; s++) begin
      hid_step = 2'(s); fc_step = 2'(s);
      #1;
      for (int l = 0; l < 4; l++) chk(int'(h_hid[l]), (4*s+l < 10) ? H[4*s+l] : 0, "h_hid");
      for (int l = 0; l < 3; l++) chk(int'(h_fc[l]), (3*s+l < 10) ? H[3*s+l] : 0, "h_fc");
    end
    for (int j = 0; j < 10; j++) chk(int'(h_all[j]), H[j], "h_all");
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; clr = 0; we = 0; hid_step = 0; fc_step = 0;
    for (int j = 0; j < 10; j++) begin h_new[j] = 12'(rnd(2047)); H[j] = 0; end
    #12 rst_n = 1;
    @(negedge clk);
    check_all();
    for (int it = 0; it < 200; it++) begin
      int op;
      op = $urandom_range(5, 0);
      for (int j = 0; j < 10; j++) h_new[j] = 12'(rnd(2047));
      we  = (op != 0);
      clr = (op == 1);
      @(negedge clk);
      if (op == 1)      for (int j = 0; j < 10; j++) H[j] = 0;
      else if (op != 0) for (int j = 0; j < 10; j++) H[j] = int'(h_new[j]);
      we = 0; clr = 0;
      check_all();
      if (it == 100) begin
        #2 rst_n = 0;
        #1 for (int j = 0; j < 10; j++) H[j] = 0;
        for (int j = 0; j < 10; j++) chk(int'(h_all[j]), 0, "async reset");
        @(negedge clk);
        rst_n = 1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
