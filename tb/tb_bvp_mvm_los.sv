// tb_bvp_mvm_los: beamspace LMMSE equalization workload at the default size,
// B = 64 antennas, U = 8 users, 16-QAM.
//
// The testbench builds a line-of-sight channel: each user arrives from one
// random angle at a uniform linear array with half-wavelength spacing, with
// a random phase and a gain between 0.5 and 1. The channel is taken to
// beamspace with a unitary 64-point DFT, where each user's column is
// concentrated on a few beams. It computes the LMMSE matrix
// W = (H^H H + N0 I)^-1 H^H in floating point (complex Gauss-Jordan
// inversion of the 8 x 8 Gram matrix), scales W into FXP(12,11) and the
// received vectors y = H s + n (SNR 20 dB per antenna) into FXP(9,1), and
// streams them through the equalizer: first with CSPADE power saving off,
// then on.
//
// Checked: every output equals the integer VP reference model; the
// symbol decisions (nearest 16-QAM point) of the hardware make at most 1%
// more errors than those of unquantized floating-point LMMSE; power saving
// skipped some products. Reported: the normalized MSE of the hardware
// output against floating-point LMMSE and the fraction of products skipped.
module tb_bvp_mvm_los;
  import vp_pkg::*;
  import vp_ref_pkg::*;

  localparam int B    = B_DEF;
  localparam int U    = U_DEF;
  localparam int NV   = 150;                  // vectors per power-saving setting
  localparam int LV   = $clog2(B);
  localparam int LAT  = 2 + LV;
  localparam int SW   = PW_DEF + 1 + LV;
  localparam int XW   = XW_DEF;
  localparam real PI  = 3.14159265358979;
  localparam real N0  = 0.01;                 // noise variance, Es = 1, unit-gain antennas: 20 dB

  int checks = 0, failures = 0;
  bit clk = 0;
  always #5 clk = !clk;

  initial begin : watchdog
    repeat (2 * NV + 4 * U + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic rst_n, lw, sp;
  logic [XW-1:0] tau_y, tau_w;
  logic [B-1:0][XW-1:0] x_re, x_im;
  logic [U-1:0][SW-1:0] s_re, s_im;
  logic s_valid;

  bvp_mvm dut (.clk, .rst_n, .lw, .sp, .tau_y, .tau_w, .x_re, .x_im, .s_re, .s_im, .s_valid);

  // ---------------------------------------------------------------- math
  real hr [B][U], hi [B][U];          // beamspace channel
  real wr [U][B], wi [U][B];          // LMMSE matrix
  real sr [2*NV][U], si [2*NV][U];    // transmitted symbols
  real yr [2*NV][B], yi [2*NV][B];    // received vectors
  longint qwr [U][B], qwi [U][B];     // quantized W, LSBs of FXP(12,11)
  longint qyr [2*NV][B], qyi [2*NV][B];
  real scale_w, scale_y;

  function automatic real urand();
    return (real'($urandom) + 0.5) / 4294967296.0;
  endfunction

  function automatic real gauss();     // standard normal, Box-Muller
    return $sqrt(-2.0 * $ln(urand())) * $cos(2.0 * PI * urand());
  endfunction

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  function automatic real qam16();
    return (2.0 * real'($urandom_range(0, 3)) - 3.0) / $sqrt(10.0);
  endfunction

  function automatic real slice16(real v);  // nearest 16-QAM level
    real l = v * $sqrt(10.0);
    real d = (l < -2.0) ? -3.0 : (l < 0.0) ? -1.0 : (l < 2.0) ? 1.0 : 3.0;
    return d / $sqrt(10.0);
  endfunction

  function automatic longint qround(real v, longint lo, longint hi);
    longint r = longint'(v);           // round to nearest
    return (r < lo) ? lo : (r > hi) ? hi : r;
  endfunction

  task automatic build_channel();
    real ar, ai, phi, g, ph;
    for (int u = 0; u < U; u++) begin
      phi = (urand() - 0.5) * PI * 0.9;          // angle of arrival
      g   = 0.5 + 0.5 * urand();
      ph  = 2.0 * PI * urand();
      for (int k = 0; k < B; k++) begin          // beam k = DFT bin k
        hr[k][u] = 0.0; hi[k][u] = 0.0;
        for (int n = 0; n < B; n++) begin
          // antenna n: g e^{j(ph + pi n sin(phi))}, DFT kernel e^{-j 2 pi k n / B} / sqrt(B)
          ar = ph + PI * n * $sin(phi) - 2.0 * PI * k * n / B;
          hr[k][u] += g * $cos(ar) / $sqrt(real'(B));
          hi[k][u] += g * $sin(ar) / $sqrt(real'(B));
        end
      end
    end
  endtask

  task automatic build_lmmse();
    real gr [U][2*U], gi [U][2*U];               // [G | I], G = H^H H + N0 I
    real pr, pi_, tr, ti, den;
    for (int a = 0; a < U; a++) begin
      for (int b = 0; b < U; b++) begin
        gr[a][b] = (a == b) ? N0 : 0.0; gi[a][b] = 0.0;
        for (int k = 0; k < B; k++) begin        // conj(h_ka) h_kb
          gr[a][b] += hr[k][a] * hr[k][b] + hi[k][a] * hi[k][b];
          gi[a][b] += hr[k][a] * hi[k][b] - hi[k][a] * hr[k][b];
        end
        gr[a][U+b] = (a == b) ? 1.0 : 0.0; gi[a][U+b] = 0.0;
      end
    end
    // Gauss-Jordan; G is Hermitian positive definite, no pivoting needed
    for (int c = 0; c < U; c++) begin
      den = gr[c][c] * gr[c][c] + gi[c][c] * gi[c][c];
      pr = gr[c][c] / den; pi_ = -gi[c][c] / den;   // 1 / G[c][c]
      for (int j = 0; j < 2 * U; j++) begin
        tr = gr[c][j] * pr - gi[c][j] * pi_;
        ti = gr[c][j] * pi_ + gi[c][j] * pr;
        gr[c][j] = tr; gi[c][j] = ti;
      end
      for (int r = 0; r < U; r++) begin
        if (r == c) continue;
        pr = gr[r][c]; pi_ = gi[r][c];
        for (int j = 0; j < 2 * U; j++) begin
          gr[r][j] -= pr * gr[c][j] - pi_ * gi[c][j];
          gi[r][j] -= pr * gi[c][j] + pi_ * gr[c][j];
        end
      end
    end
    // W = G^-1 H^H
    for (int u = 0; u < U; u++) begin
      for (int k = 0; k < B; k++) begin
        wr[u][k] = 0.0; wi[u][k] = 0.0;
        for (int v = 0; v < U; v++) begin        // Ginv[u][v] * conj(h_kv)
          wr[u][k] += gr[u][U+v] * hr[k][v] + gi[u][U+v] * hi[k][v];
          wi[u][k] += gi[u][U+v] * hr[k][v] - gr[u][U+v] * hi[k][v];
        end
      end
    end
  endtask

  task automatic build_data();
    real m;
    for (int t = 0; t < 2 * NV; t++) begin
      for (int u = 0; u < U; u++) begin sr[t][u] = qam16(); si[t][u] = qam16(); end
      for (int k = 0; k < B; k++) begin
        yr[t][k] = $sqrt(N0 / 2.0) * gauss();
        yi[t][k] = $sqrt(N0 / 2.0) * gauss();
        for (int u = 0; u < U; u++) begin
          yr[t][k] += hr[k][u] * sr[t][u] - hi[k][u] * si[t][u];
          yi[t][k] += hr[k][u] * si[t][u] + hi[k][u] * sr[t][u];
        end
      end
    end
    // scale W into (-1, 1) and y into (-128, 128), one scalar each
    m = 0.0;
    for (int u = 0; u < U; u++) for (int k = 0; k < B; k++) begin
      if (fabs(wr[u][k]) > m) m = fabs(wr[u][k]);
      if (fabs(wi[u][k]) > m) m = fabs(wi[u][k]);
    end
    scale_w = 0.999 / m;
    for (int u = 0; u < U; u++) for (int k = 0; k < B; k++) begin
      qwr[u][k] = qround(wr[u][k] * scale_w * 2048.0, -2048, 2047);
      qwi[u][k] = qround(wi[u][k] * scale_w * 2048.0, -2048, 2047);
    end
    m = 0.0;
    for (int t = 0; t < 2 * NV; t++) for (int k = 0; k < B; k++) begin
      if (fabs(yr[t][k]) > m) m = fabs(yr[t][k]);
      if (fabs(yi[t][k]) > m) m = fabs(yi[t][k]);
    end
    scale_y = 127.0 / m;
    for (int t = 0; t < 2 * NV; t++) for (int k = 0; k < B; k++) begin
      qyr[t][k] = qround(yr[t][k] * scale_y * 2.0, -256, 255);
      qyi[t][k] = qround(yi[t][k] * scale_y * 2.0, -256, 255);
    end
  endtask

  // ------------------------------------------------------------ checking
  typedef struct {
    bit     valid;
    int     t;
    longint re [U];
    longint im [U];
  } exp_t;
  exp_t q [$];

  int n_skip = 0, n_prod = 0, err_hw = 0, err_fl = 0, n_sym = 0;
  real nmse_num = 0.0, nmse_den = 0.0;

  task automatic compare(exp_t o);
    real er, ei, fr, fi;
    for (int u = 0; u < U; u++) begin
      checks++;
      if (sext(s_re[u], SW) != o.re[u] || sext(s_im[u], SW) != o.im[u]) begin
        failures++;
        if (failures < 10) $display("FAIL vector %0d user %0d: got %0d,%0d expected %0d,%0d",
                                    o.t, u, sext(s_re[u], SW), sext(s_im[u], SW), o.re[u], o.im[u]);
      end
      // hardware estimate back in symbol units
      er = real'(sext(s_re[u], SW)) / 4096.0 / (scale_w * scale_y);
      ei = real'(sext(s_im[u], SW)) / 4096.0 / (scale_w * scale_y);
      // floating-point LMMSE estimate
      fr = 0.0; fi = 0.0;
      for (int k = 0; k < B; k++) begin
        fr += wr[u][k] * yr[o.t][k] - wi[u][k] * yi[o.t][k];
        fi += wr[u][k] * yi[o.t][k] + wi[u][k] * yr[o.t][k];
      end
      nmse_num += (er - fr) * (er - fr) + (ei - fi) * (ei - fi);
      nmse_den += fr * fr + fi * fi;
      n_sym++;
      if (slice16(er) != sr[o.t][u] || slice16(ei) != si[o.t][u]) err_hw++;
      if (slice16(fr) != sr[o.t][u] || slice16(fi) != si[o.t][u]) err_fl++;
    end
  endtask

  task automatic step(exp_t e);
    exp_t o;
    q.push_back(e);
    @(posedge clk);
    #1;
    if (q.size() >= LAT) begin
      o = q.pop_front();
      checks++;
      if (s_valid !== o.valid) begin
        failures++;
        $display("FAIL s_valid=%0d expected %0d", s_valid, o.valid);
      end else if (o.valid) compare(o);
    end
  endtask

  longint wmr [U][B], wmi [U][B];
  int     wir [U][B], wii [U][B];
  bit     wc  [U][B];

  initial begin
    exp_t e;
    longint mr, mi;
    int ir, ii;
    bit cy;
    build_channel();
    build_lmmse();
    build_data();
    $display("scale W %f, scale y %f", scale_w, scale_y);

    rst_n = 0; lw = 0; sp = 0;
    tau_y = XW'(4); tau_w = XW'(16);
    x_re = '0; x_im = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;

    e.valid = 0;
    for (int u = 0; u < U; u++) begin           // load W
      lw = 1;
      for (int k = 0; k < B; k++) begin
        x_re[k] = XW'(qwr[u][k]); x_im[k] = XW'(qwi[u][k]);
        w_to_vp(qwr[u][k], wmr[u][k], wir[u][k]);
        w_to_vp(qwi[u][k], wmi[u][k], wii[u][k]);
        wc[u][k] = is_small(qwr[u][k], qwi[u][k], longint'(tau_w));
      end
      step(e);
    end

    for (int t = 0; t < 2 * NV; t++) begin      // stream y, power saving in the second half
      lw = 0; sp = (t >= NV);
      e.valid = 1; e.t = t;
      for (int u = 0; u < U; u++) begin e.re[u] = 0; e.im[u] = 0; end
      for (int k = 0; k < B; k++) begin
        x_re[k] = XW'(qyr[t][k]); x_im[k] = XW'(qyi[t][k]);
        y_to_vp(qyr[t][k], mr, ir);
        y_to_vp(qyi[t][k], mi, ii);
        cy = is_small(qyr[t][k], qyi[t][k], longint'(tau_y));
        for (int u = 0; u < U; u++) begin
          if (sp && cy && wc[u][k]) begin n_skip++; continue; end
          if (sp) n_prod++;
          e.re[u] += vp_prod(mr, ir, wmr[u][k], wir[u][k]) - vp_prod(mi, ii, wmi[u][k], wii[u][k]);
          e.im[u] += vp_prod(mr, ir, wmi[u][k], wii[u][k]) + vp_prod(mi, ii, wmr[u][k], wir[u][k]);
        end
      end
      step(e);
    end
    lw = 1;
    e.valid = 0;
    repeat (LAT + 1) step(e);

    checks++;
    if (err_hw > err_fl + n_sym / 100) begin
      failures++;
      $display("FAIL symbol errors: hardware %0d, floating point %0d of %0d", err_hw, err_fl, n_sym);
    end
    checks++;
    if (n_skip == 0) begin
      failures++;
      $display("FAIL power saving never skipped a product");
    end
    $display("symbols %0d, errors hardware %0d, floating-point LMMSE %0d, NMSE vs floating point %f dB",
             n_sym, err_hw, err_fl, 10.0 * $log10(nmse_num / nmse_den));
    $display("with power saving: %0d of %0d lane products skipped", n_skip, n_skip + n_prod);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
