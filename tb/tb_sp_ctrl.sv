// tb_sp_ctrl: cycle check of the SP-CM CSPADE controller.
// Random lw, c and sp sequences; a model keeps the stored weight flag and
// the expected ua, ua1 (one cycle later) and ua2 (two cycles later).
module tb_sp_ctrl;
  int checks = 0, failures = 0;
  bit clk = 0;
  always #5 clk = !clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic rst_n, lw, c, sp, ua, ua1, ua2;
  sp_ctrl dut (.clk, .rst_n, .lw, .c, .sp, .ua, .ua1, .ua2);

  bit cw_m, ua_d1, ua_d2, exp_ua;
  int n_skip = 0;

  initial begin
    rst_n = 0; lw = 0; c = 0; sp = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    cw_m = 0; ua_d1 = 0; ua_d2 = 0;
    for (int n = 0; n < 5000; n++) begin
      lw = ($urandom_range(0, 9) == 0);
      c  = 1'($urandom);
      sp = ($urandom_range(0, 3) != 0);
      #1;
      exp_ua = !(sp && c && cw_m);
      n_skip += !exp_ua;
      checks++;
      if (ua !== exp_ua || ua1 !== ua_d1 || ua2 !== ua_d2) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d ua=%b/%b ua1=%b/%b ua2=%b/%b", n, ua, exp_ua, ua1, ua_d1, ua2, ua_d2);
      end
      @(posedge clk);
      #1;
      ua_d2 = ua_d1; ua_d1 = exp_ua;
      if (lw) cw_m = c;
    end
    checks++;
    if (n_skip == 0) failures++;
    $display("skipped cycles: %0d", n_skip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
