// tb_bvp_mvm_full: end-to-end test of the VP beamspace equalizer at its
// default size, B = 64 antennas and U = 8 users (no parameter overrides).
//
// Fixed-point weights and received vectors with a sparse, high-dynamic-range
// spread (most entries small, a few large) are driven on the ports exactly
// as the receiver would: U cycles of lw = 1 for the matrix rows, then one
// received vector per cycle. A reference model converts every operand to VP
// with integer arithmetic, applies the CSPADE rule (skip when sp = 1 and
// sample and weight are both below their thresholds) and sums the exact
// products. Every output cycle is checked: s_valid and, when valid, all U
// results. Also checked: the first result appears exactly 2 + log2(B)
// cycles after its vector, results come one per cycle, and every mechanism
// occurred: weight load and reload, skipped products, small operands with
// power saving off, every exponent index of y and W, back-to-back vectors.
module tb_bvp_mvm_full;
  import vp_pkg::*;
  import vp_ref_pkg::*;

  localparam int B = vp_pkg::B_DEF;
  localparam int U = vp_pkg::U_DEF;
  localparam int NVEC = 60;     // vectors per weight load

  localparam int LV  = (B <= 1) ? 0 : $clog2(B);
  localparam int LAT = 2 + LV;
  localparam int SW  = PW_DEF + 1 + LV;
  localparam int XW  = XW_DEF;

  int checks = 0, failures = 0;
  bit clk = 0;
  always #5 clk = !clk;

  initial begin : watchdog
    repeat (3 * NVEC + 8 * U + 100) @(posedge clk);
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


  typedef struct {
    bit     valid;
    longint re [U];
    longint im [U];
  } exp_t;
  exp_t q [$];

  // model of the stored matrix, as VP, and its CSPADE flags
  longint wmr [U][B], wmi [U][B];
  int     wir [U][B], wii [U][B];
  bit     wc  [U][B];

  // mechanism counters
  int n_loads = 0, n_skip = 0, n_small_nosp = 0, n_b2b = 0, n_vec = 0;
  int hist_y [2];
  int hist_w [4];
  int cyc = 0, first_vec_cyc = -1, first_valid_cyc = -1;
  bit last_valid = 0;

  // sparse, high-dynamic-range random values in LSBs
  function automatic longint rand_w();
    longint mag;
    case ($urandom_range(0, 3))
      0: mag = $urandom_range(0, 63);
      1: mag = $urandom_range(64, 255);
      2: mag = $urandom_range(256, 1023);
      default: mag = $urandom_range(1024, 2047);
    endcase
    return ($urandom_range(0, 1) && mag != 0) ? -mag : ((mag == 2047) ? -2048 : mag);
  endfunction

  function automatic longint rand_y();
    longint mag;
    case ($urandom_range(0, 2))
      0: mag = $urandom_range(0, 7);
      1: mag = $urandom_range(8, 63);
      default: mag = $urandom_range(64, 255);
    endcase
    return ($urandom_range(0, 1) && mag != 0) ? -mag : ((mag == 255) ? -256 : mag);
  endfunction

  task automatic step(exp_t e);
    exp_t o;
    q.push_back(e);
    @(posedge clk);
    #1;
    cyc++;
    if (s_valid && first_valid_cyc < 0) first_valid_cyc = cyc;
    if (q.size() >= LAT) begin
      o = q.pop_front();
      checks++;
      if (s_valid !== o.valid) begin
        failures++;
        if (failures < 10) $display("FAIL cycle %0d: s_valid=%0d expected %0d", cyc, s_valid, o.valid);
      end else if (o.valid) begin
        for (int u = 0; u < U; u++) begin
          checks++;
          if (sext(s_re[u], SW) != o.re[u] || sext(s_im[u], SW) != o.im[u]) begin
            failures++;
            if (failures < 10)
              $display("FAIL cycle %0d user %0d: got %0d,%0d expected %0d,%0d",
                       cyc, u, sext(s_re[u], SW), sext(s_im[u], SW), o.re[u], o.im[u]);
          end
        end
      end
      if (o.valid && last_valid) n_b2b++;
      last_valid = o.valid;
    end
  endtask

  task automatic load_matrix();
    exp_t e;
    longint vr, vi;
    e.valid = 0;
    n_loads++;
    for (int u = 0; u < U; u++) begin
      lw = 1;
      for (int b = 0; b < B; b++) begin
        vr = rand_w(); vi = rand_w();
        x_re[b] = XW'(vr); x_im[b] = XW'(vi);
        w_to_vp(vr, wmr[u][b], wir[u][b]);
        w_to_vp(vi, wmi[u][b], wii[u][b]);
        hist_w[wir[u][b]]++; hist_w[wii[u][b]]++;
        wc[u][b] = is_small(vr, vi, longint'(tau_w));
      end
      step(e);
    end
  endtask

  task automatic apply_vector(bit sp_v);
    exp_t e;
    longint vr, vi, mr, mi;
    int ir, ii;
    bit cy;
    e.valid = 1;
    for (int u = 0; u < U; u++) begin e.re[u] = 0; e.im[u] = 0; end
    lw = 0; sp = sp_v;
    if (first_vec_cyc < 0) first_vec_cyc = cyc;
    n_vec++;
    for (int b = 0; b < B; b++) begin
      vr = rand_y(); vi = rand_y();
      // the upper port bits are not part of a y sample: fill them with noise
      x_re[b] = {3'($urandom), 9'(vr)};
      x_im[b] = {3'($urandom), 9'(vi)};
      y_to_vp(vr, mr, ir);
      y_to_vp(vi, mi, ii);
      hist_y[ir]++; hist_y[ii]++;
      cy = is_small(vr, vi, longint'(tau_y));
      for (int u = 0; u < U; u++) begin
        if (cy && wc[u][b]) begin
          if (sp_v) begin n_skip++; continue; end
          else n_small_nosp++;
        end
        e.re[u] += vp_prod(mr, ir, wmr[u][b], wir[u][b]) - vp_prod(mi, ii, wmi[u][b], wii[u][b]);
        e.im[u] += vp_prod(mr, ir, wmi[u][b], wii[u][b]) + vp_prod(mi, ii, wmr[u][b], wir[u][b]);
      end
    end
    step(e);
  endtask

  task automatic count(string what, int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    exp_t idle;
    idle.valid = 0;
    rst_n = 0; lw = 0; sp = 0;
    tau_y = XW'(8); tau_w = XW'(64);
    x_re = '0; x_im = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    load_matrix();
    for (int n = 0; n < NVEC; n++) apply_vector(n >= NVEC / 4);
    load_matrix();
    for (int n = 0; n < NVEC; n++) apply_vector(1'($urandom));
    lw = 1;                               // idle: no vector enters
    repeat (LAT + 1) step(idle);
    // latency and rate
    checks++;
    if (first_valid_cyc - first_vec_cyc != LAT) begin
      failures++;
      $display("FAIL latency %0d cycles, expected %0d", first_valid_cyc - first_vec_cyc, LAT);
    end
    checks++;
    if (n_b2b != n_vec - 2) begin        // two runs of back-to-back vectors
      failures++;
      $display("FAIL %0d back-to-back results for %0d vectors", n_b2b, n_vec);
    end
    count("weight load and reload", n_loads - 1);
    count("skipped products (sp = 1)", n_skip);
    count("small operands computed (sp = 0)", n_small_nosp);
    count("back-to-back vectors", n_b2b);
    for (int k = 0; k < 2; k++) count($sformatf("y exponent index %0d", k), hist_y[k]);
    for (int k = 0; k < 4; k++) count($sformatf("W exponent index %0d", k), hist_w[k]);
    $display("loads %0d, vectors %0d, latency %0d, skipped %0d, small but computed %0d, y idx %0d/%0d, W idx %0d/%0d/%0d/%0d",
             n_loads, n_vec, first_valid_cyc - first_vec_cyc, n_skip, n_small_nosp,
             hist_y[0], hist_y[1], hist_w[0], hist_w[1], hist_w[2], hist_w[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
