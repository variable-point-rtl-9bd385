// tb_sp_cm_vp: cycle check of one CSPADE complex VP multiplier.
// Random VP weights are loaded now and then (lw = 1) and random VP samples
// streamed with random small-operand flags and power-saving settings. For
// every sample applied in cycle t the outputs after edge t+2 must be the
// exact complex product of the VP values, scaled to FXP(22,12), or zero
// when sp was set and both the sample and the stored weight were small.
module tb_sp_cm_vp;
  import vp_pkg::*;
  import vp_ref_pkg::*;

  int checks = 0, failures = 0;
  bit clk = 0;
  always #5 clk = !clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic rst_n, lw, sp, c;
  logic [6:0] xr_m, xi_m;
  logic [1:0] xr_i, xi_i;
  logic [21:0] p_re, p_im;

  sp_cm_vp dut (.clk, .rst_n, .lw, .sp, .c, .xr_m, .xr_i, .xi_m, .xi_i, .p_re, .p_im);

  typedef struct { bit chk; longint re; longint im; } exp_t;
  exp_t q [$];

  longint wr_m, wi_m;
  int wr_i, wi_i;
  bit cw;
  int n_skip = 0, n_loads = 0, n_mult = 0;

  initial begin
    exp_t e;
    longint yr_m, yi_m;
    int yr_i, yi_i;
    bit ua;
    rst_n = 0; lw = 0; sp = 0; c = 0;
    xr_m = '0; xi_m = '0; xr_i = '0; xi_i = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 20000; n++) begin
      lw = (n == 0) || ($urandom_range(0, 19) == 0);
      c  = 1'($urandom);
      sp = ($urandom_range(0, 3) != 0);
      xr_m = 7'($urandom); xi_m = 7'($urandom);
      if (lw) begin
        xr_i = 2'($urandom); xi_i = 2'($urandom);
        wr_m = sext(xr_m, 7); wi_m = sext(xi_m, 7); wr_i = xr_i; wi_i = xi_i; cw = c;
        e.chk = 0; n_loads++;
      end else begin
        xr_i = 2'($urandom_range(0, 1)); xi_i = 2'($urandom_range(0, 1));
        yr_m = sext(xr_m, 7); yi_m = sext(xi_m, 7); yr_i = xr_i; yi_i = xi_i;
        ua = !(sp && c && cw);
        e.chk = 1;
        if (ua) begin
          e.re = vp_prod(yr_m, yr_i, wr_m, wr_i) - vp_prod(yi_m, yi_i, wi_m, wi_i);
          e.im = vp_prod(yr_m, yr_i, wi_m, wi_i) + vp_prod(yi_m, yi_i, wr_m, wr_i);
          n_mult++;
        end else begin
          e.re = 0; e.im = 0; n_skip++;
        end
      end
      q.push_back(e);
      @(posedge clk);
      #1;
      if (q.size() >= 2) begin
        e = q.pop_front();
        if (e.chk) begin
          checks++;
          if (sext(p_re, 22) != e.re || sext(p_im, 22) != e.im) begin
            failures++;
            if (failures < 10) $display("FAIL n=%0d got %0d,%0d expected %0d,%0d", n, sext(p_re, 22), sext(p_im, 22), e.re, e.im);
          end
        end
      end
    end
    checks++;
    if (n_skip == 0 || n_loads < 2 || n_mult == 0) failures++;
    $display("weight loads %0d, products %0d, skipped %0d", n_loads, n_mult, n_skip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
