// tb_dpd_neural_engine: end-to-end test of the DPD accelerator at its default size.
//
// Loads random model parameters through the weight port, streams a synthetic
// multi-tone I/Q signal and compares every output sample bit-exactly with a
// GRU reference model kept in this testbench (same Q2.10 format, floor and
// saturation rules, hard sigmoid/tanh). It also checks
//   - the latency: out_valid exactly LATENCY = 15 cycles after acceptance,
//   - the rate: under continuous requests one sample every 8 cycles,
//   - that in_ready is low while a sample occupies its 8-cycle slot.
// The run has four segments: two parameter sets (the second loaded after the
// first segment, while idle), hidden-state clears between segments, and
// alternating bursts of continuous and sparse input. Each mechanism is
// counted and a failure is counted for one that never occurred: max-rate
// samples, idle restarts, refused requests, state clears, parameter reloads,
// hard-sigmoid clipping high and low, hard-tanh clipping, |x|^2 feature
// saturation and output saturation.
module tb_dpd_neural_engine;
  import dpd_ref_pkg::*;
  localparam int LAT = 15, PERIOD = 8;

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

  // ---------------- reference model ----------------
  gru_ref m = new();
  int n_maxrate = 0, n_restart = 0, n_refused = 0, n_clr = 0, n_reload = 0;

  // expected outputs in order: value pair and the cycle it must appear
  int     exp_i [$], exp_q [$];
  longint exp_t [$];

  // ---------------- monitor ----------------
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (exp_i.size() == 0) begin
        failures++;
        $display("unexpected output at cycle %0d", cyc);
      end else begin
        int ei, eq;
        longint et;
        ei = exp_i.pop_front(); eq = exp_q.pop_front(); et = exp_t.pop_front();
        if (int'(out_i) != ei || int'(out_q) != eq) begin
          failures++;
          if (failures < 10) $display("cycle %0d: out (%0d,%0d) exp (%0d,%0d)", cyc, out_i, out_q, ei, eq);
        end
        checks++;
        if (cyc != et) begin
          failures++;
          if (failures < 10) $display("latency: output at cycle %0d, expected %0d", cyc, et);
        end
      end
    end
  end

  // ---------------- stimulus ----------------
  task automatic load_weights(input int wlim, input int blim);
    m.rand_weights(wlim, blim);
    for (int a = 0; a < 502; a++) begin
      @(negedge clk);
      w_we = 1; w_addr = 9'(a); w_data = 12'(m.param(a));
    end
    @(negedge clk);
    w_we = 0;
  endtask

  task automatic clear_state();
    @(negedge clk);
    state_clr = 1;
    @(negedge clk);
    state_clr = 0;
    m.clear_state();
    n_clr++;
  endtask

  task automatic wait_idle();
    while (busy || exp_i.size() != 0) @(negedge clk);
  endtask

  // one segment of n samples: multi-tone with amplitude amp (LSB)
  task automatic run_segment(input int n, input real amp, input int seg);
    longint last_acc = -1000;
    bit sparse;
    real ph1, ph2, ph3;
    ph1 = 0.0; ph2 = 1.0; ph3 = 2.0;
    for (int k = 0; k < n; k++) begin
      real iv_r, qv_r;
      int iv, qv, yi, yq;
      longint t0;
      sparse = ((k / 40) % 2) == 1;
      iv_r = amp * (0.55 * $cos(ph1) + 0.3 * $cos(ph2) + 0.15 * $sin(ph3));
      qv_r = amp * (0.55 * $sin(ph1) - 0.3 * $sin(ph2) + 0.15 * $cos(ph3));
      ph1 += 0.31 + 0.01 * seg; ph2 += 0.77; ph3 += 1.93;
      iv = int'(iv_r); qv = int'(qv_r);
      if (iv > 2047) iv = 2047;
      if (iv < -2048) iv = -2048;
      if (qv > 2047) qv = 2047;
      if (qv < -2048) qv = -2048;
      if (sparse) repeat ($urandom_range(12, 0)) @(negedge clk);
      in_valid = 1; in_i = 12'(iv); in_q = 12'(qv);
      #1;
      while (!in_ready) begin
        n_refused++;
        @(negedge clk);
        #1;
      end
      t0 = cyc;
      if (!sparse && t0 - last_acc < PERIOD + 1) begin
        checks++;
        if (t0 - last_acc != PERIOD) begin
          failures++;
          $display("rate: samples %0d cycles apart under continuous input", t0 - last_acc);
        end
        n_maxrate++;
      end
      if (t0 - last_acc > PERIOD) n_restart++;
      last_acc = t0;
      m.step(iv, qv, yi, yq);
      exp_i.push_back(yi); exp_q.push_back(yq); exp_t.push_back(t0 + LAT);
      @(negedge clk);
      in_valid = 0;
    end
  endtask

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; in_valid = 0; in_i = 0; in_q = 0; state_clr = 0; w_we = 0; w_addr = 0; w_data = 0;
    m.clear_state();
    #22 rst_n = 1;
    // segment 0: moderate weights, moderate signal
    load_weights(600, 300);
    run_segment(300, 1100.0, 0);
    wait_idle();
    // segment 1: same weights, new signal after a state clear, larger amplitude
    clear_state();
    run_segment(300, 1700.0, 1);
    wait_idle();
    // segment 2: reload with larger weights (drives activations into clipping)
    load_weights(1500, 1200);
    n_reload++;
    clear_state();
    run_segment(300, 1400.0, 2);
    wait_idle();
    // segment 3: no clear, keep running with the state carried over
    run_segment(200, 900.0, 3);
    wait_idle();
    repeat (20) @(negedge clk);
    $display("max-rate=%0d restarts=%0d refused=%0d clears=%0d reloads=%0d sig_hi=%0d sig_lo=%0d tanh_clip=%0d feat_sat=%0d out_sat=%0d",
             n_maxrate, n_restart, n_refused, n_clr, n_reload, m.n_sig_hi, m.n_sig_lo, m.n_tanh, m.n_feat_sat, m.n_out_sat);
    foreach (exp_i[k]) begin failures++; end
    checks++;
    if (n_maxrate == 0 || n_restart == 0 || n_refused == 0 || n_clr == 0 || n_reload == 0 ||
        m.n_sig_hi == 0 || m.n_sig_lo == 0 || m.n_tanh == 0 || m.n_feat_sat == 0 || m.n_out_sat == 0) begin
      failures++;
      $display("a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
