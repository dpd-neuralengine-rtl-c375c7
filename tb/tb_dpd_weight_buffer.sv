// tb_dpd_weight_buffer: loads all 502 parameters with random values through
// the write port and checks every read port for every step value against the
// address map (W_ih 0-119, W_hh 120-419, b_ih 420-449, b_hh 450-479,
// W_fc 480-499, b_fc 500-501), including the zero padding past column 9 and
// that out-of-range writes are ignored. A second load overwrites everything.
module tb_dpd_weight_buffer;
  import dpd_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  logic we;
  logic [8:0] waddr;
  logic signed [11:0] wdata;
  logic [1:0] in_step, hid_step, fc_step;
  logic signed [11:0] w_in [30];
  logic signed [11:0] w_hid [30][4];
  logic signed [11:0] w_fc [2][3];
  logic signed [11:0] b_ih [30];
  logic signed [11:0] b_hh [30];
  logic signed [11:0] b_fc [2];
  int checks = 0, failures = 0;
  int M [502];

  dpd_weight_buffer dut (.clk, .we, .waddr, .wdata, .in_step, .hid_step, .fc_step,
                         .w_in, .w_hid, .w_fc, .b_ih, .b_hh, .b_fc);

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
    we = 0; waddr = 0; wdata = 0; in_step = 0; hid_step = 0; fc_step = 0;
    @(negedge clk);
    for (int pass = 0; pass < 2; pass++) begin
      for (int a = 0; a < 502; a++) begin
        M[a] = rnd(2047);
        we = 1; waddr = 9'(a); wdata = 12'(M[a]);
        @(negedge clk);
      end
      // writes past the end must not alias onto real entries
      for (int a = 502; a < 512; a++) begin
        we = 1; waddr = 9'(a); wdata = 12'(rnd(2047));
        @(negedge clk);
      end
      we = 0;
      for (int s = 0; s < 4; s++) begin
        in_step = 2'(s); hid_step = 2'(s); fc_step = 2'(s);
        #1;
        for (int r = 0; r < 30; r++) begin
          chk(int'(w_in[r]), M[r*4 + s], "w_in");
          chk(int'(b_ih[r]), M[420 + r], "b_ih");
          chk(int'(b_hh[r]), M[450 + r], "b_hh");
          for (int l = 0; l < 4; l++) begin
            int c;
            c = 4*s + l;
            chk(int'(w_hid[r][l]), (c < 10) ? M[120 + r*10 + c] : 0, "w_hid");
          end
        end
        for (int o = 0; o < 2; o++) begin
          chk(int'(b_fc[o]), M[500 + o], "b_fc");
          for (int l = 0; l < 3; l++) begin
            int c;
            c = 3*s + l;
            chk(int'(w_fc[o][l]), (c < 10) ? M[480 + o*10 + c] : 0, "w_fc");
          end
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
