// tb_dotp: one dot product unit (B = 8 lanes, U = 4, position IDX = 2).
// A load burst of U random VP rows is applied, of which only row 2 must be
// kept; then random VP vectors with random CSPADE flags stream at one per
// cycle. Each result must appear exactly 2 + log2(B) = 5 cycles after its
// vector and equal the sum of the lane products, skipped lanes counting
// zero. A second load burst replaces the row midway.
module tb_dotp;
  import vp_pkg::*;
  import vp_ref_pkg::*;

  localparam int B = 8, U = 4, IDX = 2, LV = 3, LAT = 2 + LV, SW = PW_DEF + 1 + LV;

  int checks = 0, failures = 0;
  bit clk = 0;
  always #5 clk = !clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic rst_n, lw, sp;
  logic [B-1:0] c;
  logic [B-1:0][6:0] xr_m, xi_m;
  logic [B-1:0][1:0] xr_i, xi_i;
  logic [SW-1:0] s_re, s_im;

  dotp #(.B(B), .U(U), .IDX(IDX)) dut (.clk, .rst_n, .lw, .sp, .c, .xr_m, .xr_i, .xi_m, .xi_i, .s_re, .s_im);

  typedef struct { bit chk; longint re; longint im; } exp_t;
  exp_t q [$];

  longint wr_m [B], wi_m [B];
  int wr_i [B], wi_i [B];
  bit cw [B];
  int n_skip = 0;

  task automatic load_burst();
    exp_t e;
    e.chk = 0;
    for (int r = 0; r < U; r++) begin
      lw = 1; sp = 1'($urandom);
      for (int b = 0; b < B; b++) begin
        c[b] = 1'($urandom);
        xr_m[b] = 7'($urandom); xi_m[b] = 7'($urandom);
        xr_i[b] = 2'($urandom); xi_i[b] = 2'($urandom);
        if (r == IDX) begin
          wr_m[b] = sext(xr_m[b], 7); wi_m[b] = sext(xi_m[b], 7);
          wr_i[b] = xr_i[b]; wi_i[b] = xi_i[b]; cw[b] = c[b];
        end
      end
      step(e);
    end
  endtask

  task automatic vector();
    exp_t e;
    longint yr, yi;
    e.chk = 1; e.re = 0; e.im = 0;
    lw = 0; sp = ($urandom_range(0, 3) != 0);
    for (int b = 0; b < B; b++) begin
      c[b] = 1'($urandom);
      xr_m[b] = 7'($urandom); xi_m[b] = 7'($urandom);
      xr_i[b] = 2'($urandom_range(0, 1)); xi_i[b] = 2'($urandom_range(0, 1));
      yr = sext(xr_m[b], 7); yi = sext(xi_m[b], 7);
      if (sp && c[b] && cw[b]) n_skip++;
      else begin
        e.re += vp_prod(yr, xr_i[b], wr_m[b], wr_i[b]) - vp_prod(yi, xi_i[b], wi_m[b], wi_i[b]);
        e.im += vp_prod(yr, xr_i[b], wi_m[b], wi_i[b]) + vp_prod(yi, xi_i[b], wr_m[b], wr_i[b]);
      end
    end
    step(e);
  endtask

  task automatic step(exp_t e);
    exp_t o;
    q.push_back(e);
    @(posedge clk);
    #1;
    if (q.size() >= LAT) begin
      o = q.pop_front();
      if (o.chk) begin
        checks++;
        if (sext(s_re, SW) != o.re || sext(s_im, SW) != o.im) begin
          failures++;
          if (failures < 10) $display("FAIL got %0d,%0d expected %0d,%0d", sext(s_re, SW), sext(s_im, SW), o.re, o.im);
        end
      end
    end
  endtask

  initial begin
    rst_n = 0; lw = 0; sp = 0; c = '0;
    xr_m = '0; xi_m = '0; xr_i = '0; xi_i = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    load_burst();
    repeat (500) vector();
    load_burst();
    repeat (500) vector();
    lw = 0;
    repeat (LAT) begin
      exp_t e;
      e.chk = 0;
      step(e);
    end
    checks++;
    if (n_skip == 0) failures++;
    $display("skipped lane products %0d", n_skip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
