// tb_vp_in_conv: exhaustive check of one input converter pair.
// Every 12-bit port value is applied with lw = 1 (weight, FXP(12,11) ->
// VP(7,[11,9,7,6])) and lw = 0 (sample, low 9 bits FXP(9,1) ->
// VP(7,[1,-1])) and compared with the integer model.
module tb_vp_in_conv;
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

  logic lw;
  logic [11:0] x;
  logic [6:0] m;
  logic [1:0] i;

  vp_in_conv dut (.lw, .x, .m, .i);

  initial begin
    longint m_exp;
    int i_exp;
    for (int l = 0; l < 2; l++) begin
      for (int v = 0; v < 4096; v++) begin
        lw = 1'(l); x = 12'(v);
        #1;
        if (lw) w_to_vp(sext(v, 12), m_exp, i_exp);
        else    y_to_vp(sext(v, 9), m_exp, i_exp);
        checks++;
        if (sext(m, 7) != m_exp || int'(i) != i_exp) begin
          failures++;
          if (failures < 10) $display("FAIL lw=%0d x=%h: m=%0d i=%0d exp m=%0d i=%0d", lw, x, sext(m, 7), i, m_exp, i_exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
