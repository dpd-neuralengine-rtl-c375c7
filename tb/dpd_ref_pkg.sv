// dpd_ref_pkg: integer reference arithmetic for the DPD testbenches.
//
// Written independently of the RTL: floor division uses $floor on reals
// rather than arithmetic shifts, and saturation uses plain comparisons. All
// values are integers in LSB of Q2.10 (1.0 = 1024) unless stated. The class
// gru_ref is the end-to-end model of the accelerator used by the top-level
// and workload testbenches.
package dpd_ref_pkg;

  // floor(v / 2^sh)
  function automatic longint fl(input longint v, input int sh);
    return longint'($floor(real'(v) / (2.0 ** sh)));
  endfunction

  function automatic int sat12(input longint v);
    if (v > 2047)  return 2047;
    if (v < -2048) return -2048;
    return int'(v);
  endfunction

  // product-scale (20 fractional bits) value to Q2.10
  function automatic int q(input longint acc);
    return sat12(fl(acc, 10));
  endfunction

  // Hardsigmoid: 1 for x > 2, x/4 + 1/2 on [-2, 2], 0 for x < -2
  function automatic int hsig(input int x);
    if (x > 2048)  return 1024;
    if (x < -2048) return 0;
    return int'(fl(x, 2)) + 512;
  endfunction

  // Hardtanh: clamp to [-1, 1]
  function automatic int htanh(input int x);
    if (x > 1024)  return 1024;
    if (x < -1024) return -1024;
    return x;
  endfunction

  // random Q2.10 value in [-lim, lim]
  function automatic int rnd(input int lim);
    return int'($urandom_range(2*lim, 0)) - lim;
  endfunction

  // Bit-exact reference of the accelerator's GRU: same Q2.10 format, floor
  // and saturation points, hard sigmoid/tanh, gate order r, z, n and weight
  // address map. Counts how often each clipping region is reached.
  class gru_ref;
    int WIH [30][4];
    int WHH [30][10];
    int BIH [30];
    int BHH [30];
    int WFC [2][10];
    int BFC [2];
    int H [10];
    int n_sig_hi = 0, n_sig_lo = 0, n_tanh = 0, n_feat_sat = 0, n_out_sat = 0;

    function void rand_weights(input int wlim, input int blim);
      for (int k = 0; k < 30; k++) begin
        for (int c = 0; c < 4; c++)  WIH[k][c] = rnd(wlim);
        for (int c = 0; c < 10; c++) WHH[k][c] = rnd(wlim);
        BIH[k] = rnd(blim); BHH[k] = rnd(blim);
      end
      for (int o = 0; o < 2; o++) begin
        for (int c = 0; c < 10; c++) WFC[o][c] = rnd(wlim);
        BFC[o] = rnd(blim);
      end
    endfunction

    // parameter at a weight-buffer address
    function int param(input int a);
      if (a < 120) return WIH[a / 4][a % 4];
      if (a < 420) return WHH[(a - 120) / 10][(a - 120) % 10];
      if (a < 450) return BIH[a - 420];
      if (a < 480) return BHH[a - 450];
      if (a < 500) return WFC[(a - 480) / 10][(a - 480) % 10];
      return BFC[a - 500];
    endfunction

    function void clear_state();
      for (int j = 0; j < 10; j++) H[j] = 0;
    endfunction

    function void step(input int iv, input int qv, output int yi, output int yq);
      int x [4];
      int gi [30], gh [30];
      int hn [10];
      int m, r, z, n, y [2];
      longint s;
      s = longint'(iv) * iv + longint'(qv) * qv;
      m = q(s);
      if (s >= 2048 * 1024) n_feat_sat++;
      x[0] = iv; x[1] = qv; x[2] = m; x[3] = q(longint'(m) * m);
      for (int k = 0; k < 30; k++) begin
        s = longint'(BIH[k]) * 1024;
        for (int c = 0; c < 4; c++) s += longint'(WIH[k][c]) * x[c];
        gi[k] = q(s);
        s = longint'(BHH[k]) * 1024;
        for (int c = 0; c < 10; c++) s += longint'(WHH[k][c]) * H[c];
        gh[k] = q(s);
      end
      for (int j = 0; j < 10; j++) begin
        if (gi[j] + gh[j] > 2048 || gi[10+j] + gh[10+j] > 2048) n_sig_hi++;
        if (gi[j] + gh[j] < -2048 || gi[10+j] + gh[10+j] < -2048) n_sig_lo++;
        r = hsig(gi[j] + gh[j]);
        z = hsig(gi[10+j] + gh[10+j]);
        n = htanh(gi[20+j] + int'(fl(longint'(r) * gh[20+j], 10)));
        if (n == 1024 || n == -1024) n_tanh++;
        hn[j] = sat12(n + fl(longint'(z) * (H[j] - n), 10));
      end
      H = hn;
      for (int o = 0; o < 2; o++) begin
        s = longint'(BFC[o]) * 1024;
        for (int c = 0; c < 10; c++) s += longint'(WFC[o][c]) * H[c];
        y[o] = q(s);
        if (y[o] == 2047 || y[o] == -2048) n_out_sat++;
      end
      yi = y[0]; yq = y[1];
    endfunction
  endclass

endpackage
