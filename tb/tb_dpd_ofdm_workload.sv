// tb_dpd_ofdm_workload: the accelerator on a wideband OFDM signal at full rate.
//
// Synthesises the kind of signal the pre-distorter is meant for: 64-QAM OFDM,
// 256-point IDFT at 250 MSps with 82 occupied subcarriers (+-41, DC empty),
// i.e. about 80 MHz of occupied bandwidth, scaled to an RMS of 320 LSB
// (0.31 in Q2.10) and clipped to a peak-to-average power ratio of 8.2 dB.
// Four OFDM symbols (1024 samples) are streamed with in_valid held high, so
// the accelerator runs at its maximum rate of one sample per 8 cycles. The
// parameters are random (no trained model is available to the testbench).
// Every output is compared bit-exactly with the reference model, the latency
// of every sample must be 15 cycles, the whole stream must take exactly 8
// cycles per sample (250 MSps at a 2 GHz clock), and the measured PAPR of the
// stimulus must not exceed 8.2 dB.
module tb_dpd_ofdm_workload;
  import dpd_ref_pkg::*;
  localparam int NFFT = 256, NSC = 41, NSYM = 4, NS = NFFT * NSYM;
  localparam real RMS = 320.0, PAPR_DB = 8.2, PI = 3.14159265358979;

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, in_valid, in_ready, out_valid, state_clr, w_we, busy;
  logic signed [11:0] in_i, in_q, out_i, out_q, w_data;
  logic [8:0] w_addr;

  dpd_neural_engine dut (.clk, .rst_n, .in_valid, .in_ready, .in_i, .in_q,
                         .out_valid, .out_i, .out_q, .state_clr, .w_we, .w_addr, .w_data, .busy);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  gru_ref m = new();
  int sig_i [NS], sig_q [NS];
  int     exp_i [$], exp_q [$];
  longint exp_t [$];
  int n_out = 0;

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      n_out++;
      checks++;
      if (exp_i.size() == 0) begin
        failures++;
      end else begin
        int ei, eq;
        longint et;
        ei = exp_i.pop_front(); eq = exp_q.pop_front(); et = exp_t.pop_front();
        if (int'(out_i) != ei || int'(out_q) != eq || cyc != et) begin
          failures++;
          if (failures < 10) $display("cycle %0d: out (%0d,%0d) exp (%0d,%0d) due %0d", cyc, out_i, out_q, ei, eq, et);
        end
      end
    end
  end

  task automatic make_ofdm(output int n_clipped, output real papr_db);
    real xi [NS], xq [NS];
    real p, pk, sc, a, lim;
    int lv [8];
    lv = '{-7, -5, -3, -1, 1, 3, 5, 7};
    for (int s = 0; s < NSYM; s++) begin
      real di [2*NSC], dq [2*NSC];
      for (int k = 0; k < 2*NSC; k++) begin
        di[k] = lv[$urandom_range(7, 0)];
        dq[k] = lv[$urandom_range(7, 0)];
      end
      for (int n = 0; n < NFFT; n++) begin
        real re, im;
        re = 0.0; im = 0.0;
        for (int k = 0; k < 2*NSC; k++) begin
          int f;
          real th;
          f  = (k < NSC) ? k + 1 : k - 2*NSC;     // +1..+41, -41..-1
          th = 2.0 * PI * f * n / NFFT;
          re += di[k] * $cos(th) - dq[k] * $sin(th);
          im += di[k] * $sin(th) + dq[k] * $cos(th);
        end
        xi[s*NFFT + n] = re;
        xq[s*NFFT + n] = im;
      end
    end
    p = 0.0;
    for (int n = 0; n < NS; n++) p += xi[n]*xi[n] + xq[n]*xq[n];
    sc  = RMS / $sqrt(p / NS);
    lim = RMS * (10.0 ** (PAPR_DB / 20.0));
    n_clipped = 0;
    p = 0.0; pk = 0.0;
    for (int n = 0; n < NS; n++) begin
      real ri, rq;
      ri = xi[n] * sc; rq = xq[n] * sc;
      a = $sqrt(ri*ri + rq*rq);
      if (a > lim) begin
        ri = ri * lim / a; rq = rq * lim / a;
        n_clipped++;
      end
      sig_i[n] = int'($floor(ri));
      sig_q[n] = int'($floor(rq));
      a = real'(sig_i[n])**2 + real'(sig_q[n])**2;
      p += a;
      if (a > pk) pk = a;
    end
    papr_db = 10.0 * $log10(pk / (p / NS));
  endtask

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_clipped, yi, yq;
    real papr;
    longint t_first, t_last;
    rst_n = 0; in_valid = 0; in_i = 0; in_q = 0; state_clr = 0; w_we = 0; w_addr = 0; w_data = 0;
    m.clear_state();
    make_ofdm(n_clipped, papr);
    $display("OFDM stimulus: %0d samples, PAPR %0.2f dB, %0d samples clipped", NS, papr, n_clipped);
    checks++;
    if (papr > PAPR_DB + 0.05 || n_clipped == 0) begin
      failures++;
      $display("stimulus PAPR out of range");
    end
    #22 rst_n = 1;
    m.rand_weights(600, 300);
    for (int a = 0; a < 502; a++) begin
      @(negedge clk);
      w_we = 1; w_addr = 9'(a); w_data = 12'(m.param(a));
    end
    @(negedge clk);
    w_we = 0;
    in_valid = 1;
    t_first = -1; t_last = 0;
    for (int n = 0; n < NS; n++) begin
      in_i = 12'(sig_i[n]); in_q = 12'(sig_q[n]);
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
      if (t_first < 0) t_first = cyc;
      t_last = cyc;
      m.step(sig_i[n], sig_q[n], yi, yq);
      exp_i.push_back(yi); exp_q.push_back(yq); exp_t.push_back(cyc + 15);
      @(negedge clk);
    end
    in_valid = 0;
    while (exp_i.size() != 0) @(negedge clk);
    repeat (20) @(negedge clk);
    $display("%0d samples in %0d cycles: %0.1f MSps and %0.1f GOPS at 2 GHz (1026 operations per sample)",
             NS, t_last - t_first + 1, 2000.0 * (NS - 1) / real'(t_last - t_first),
             1.026 * 2000.0 * (NS - 1) / real'(t_last - t_first));
    checks++;
    if (t_last - t_first != 8 * (NS - 1)) begin
      failures++;
      $display("stream did not run at one sample per 8 cycles");
    end
    checks++;
    if (n_out != NS) begin
      failures++;
      $display("%0d outputs for %0d inputs", n_out, NS);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
