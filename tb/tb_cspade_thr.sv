// tb_cspade_thr: random check of the CSPADE small-operand flag.
// Random port values (full range and small values near the thresholds),
// random thresholds and both lw settings; the flag must equal
// |Re| < tau && |Im| < tau with the y format (9 bits) or W format (12 bits).
module tb_cspade_thr;
  import vp_ref_pkg::*;

  int checks = 0, failures = 0;
  bit clk = 0;
  always #5 clk = !clk;

  initial begin : watchdog
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic lw, c;
  logic [11:0] tau_y, tau_w, x_re, x_im;

  cspade_thr #(.XW(12), .WY(9), .WW(12)) dut (.lw, .tau_y, .tau_w, .x_re, .x_im, .c);

  int n_small = 0;

  initial begin
    longint re, im, tau;
    bit exp_c;
    for (int n = 0; n < 40000; n++) begin
      lw    = 1'($urandom);
      tau_y = 12'($urandom_range(0, 40));
      tau_w = 12'($urandom_range(0, 300));
      if (n % 2 == 0) begin
        x_re = 12'($urandom); x_im = 12'($urandom);
      end else begin
        x_re = 12'(int'($urandom_range(0, 600)) - 300);
        x_im = 12'(int'($urandom_range(0, 600)) - 300);
        if (!lw) begin   // y with a random (ignored) upper part
          x_re[11:9] = 3'($urandom); x_im[11:9] = 3'($urandom);
          x_re[8:0] = 9'(int'($urandom_range(0, 80)) - 40);
          x_im[8:0] = 9'(int'($urandom_range(0, 80)) - 40);
        end
      end
      #1;
      re  = lw ? sext(x_re, 12) : sext(x_re, 9);
      im  = lw ? sext(x_im, 12) : sext(x_im, 9);
      tau = lw ? tau_w : tau_y;
      exp_c = is_small(re, im, tau);
      n_small += exp_c;
      checks++;
      if (c != exp_c) begin
        failures++;
        if (failures < 10) $display("FAIL lw=%0d re=%0d im=%0d tau=%0d c=%0d", lw, re, im, tau, c);
      end
    end
    checks++;
    if (n_small == 0) failures++;
    $display("small flags: %0d", n_small);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
