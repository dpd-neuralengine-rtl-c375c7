// tb_dpd_sigmoid_tanh_unit: checks the GRU gate pipeline for all 10 units.
// Random gate inputs (wide enough to clip both hard functions on both sides)
// and a random previous state are applied; after stage 1 and stage 2 the
// combinational h_new is compared with the reference
//   r = hsig(gi_r+gh_r), z = hsig(gi_z+gh_z), n = htanh(gi_n + floor(r*gh_n/1024)),
//   h = sat(n + floor(z*(h_prev-n)/1024)).
// Inputs are scrambled after each enable to check the stage registers.
module tb_dpd_sigmoid_tanh_unit;
  import dpd_ref_pkg::*;
  localparam int NH = 10;
  logic clk = 0;
  always #5 clk = ~clk;

  logic s1_en, s2_en;
  logic signed [11:0] gi [3*NH];
  logic signed [11:0] gh [3*NH];
  logic signed [11:0] h_prev [NH];
  logic signed [11:0] h_new [NH];
  int checks = 0, failures = 0;
  int clip_sig_hi = 0, clip_sig_lo = 0, clip_tanh = 0;

  dpd_sigmoid_tanh_unit #(.N_HID(NH)) dut (.clk, .s1_en, .s2_en, .gi, .gh, .h_prev, .h_new);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic scramble();
    for (int k = 0; k < 3*NH; k++) begin gi[k] = 12'(rnd(2047)); gh[k] = 12'(rnd(2047)); end
  endtask

  initial begin
    int GI [3*NH], GH [3*NH], HP [NH];
    int r, z, n, e;
    s1_en = 0; s2_en = 0;
    scramble();
    for (int j = 0; j < NH; j++) h_prev[j] = 0;
    @(negedge clk);
    for (int it = 0; it < 400; it++) begin
      int lim;
      lim = (it % 2 == 0) ? 2047 : 700;
      for (int k = 0; k < 3*NH; k++) begin GI[k] = rnd(lim); GH[k] = rnd(lim); end
      for (int j = 0; j < NH; j++) HP[j] = rnd(1024);
      for (int k = 0; k < 3*NH; k++) begin gi[k] = 12'(GI[k]); gh[k] = 12'(GH[k]); end
      s1_en = 1;
      @(negedge clk);
      s1_en = 0; s2_en = 1;
      scramble();
      @(negedge clk);
      s2_en = 0;
      scramble();
      for (int j = 0; j < NH; j++) h_prev[j] = 12'(HP[j]);
      #1;
      for (int j = 0; j < NH; j++) begin
        r = hsig(GI[j] + GH[j]);
        z = hsig(GI[NH+j] + GH[NH+j]);
        if (GI[j] + GH[j] > 2048) clip_sig_hi++;
        if (GI[j] + GH[j] < -2048) clip_sig_lo++;
        n = htanh(GI[2*NH+j] + int'(fl(longint'(r) * GH[2*NH+j], 10)));
        if (n == 1024 || n == -1024) clip_tanh++;
        e = sat12(n + fl(longint'(z) * (HP[j] - n), 10));
        checks++;
        if (int'(h_new[j]) != e) begin
          failures++;
          if (failures < 10) $display("it=%0d j=%0d got %0d exp %0d", it, j, h_new[j], e);
        end
      end
      @(negedge clk);
    end
    checks++;
    if (clip_sig_hi == 0 || clip_sig_lo == 0 || clip_tanh == 0) begin
      failures++;
      $display("a clipping region was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
