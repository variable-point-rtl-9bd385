// tb_fxp2vp: exhaustive check of the FXP-to-VP converter.
//
// Three instances: the weight format FXP(12,11) -> VP(7,[11,9,7,6]), the
// received-sample format FXP(9,1) -> VP(7,[1,-1]) and the small example
// FXP(8,1) -> VP(6,[1,-1]). Every input code is applied and the significand
// and index are compared with an integer model (first fractional length
// whose shifted value fits in M bits). The two example codes 111xxxxx
// (index 0) and 011xxxxx (index 1) of the small format are checked too.
module tb_fxp2vp;
  import vp_ref_pkg::*;

  int checks = 0, failures = 0;
  bit clk = 0;
  always #5 clk = !clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [11:0] xw;  logic [6:0] mw;  logic [1:0] iw;
  logic [8:0]  xy;  logic [6:0] my;  logic [0:0] iy;
  logic [7:0]  xe;  logic [5:0] me;  logic [0:0] ie;

  localparam int FLW [4] = '{11, 9, 7, 6};
  localparam int FLY [2] = '{1, -1};

  fxp2vp #(.W(12), .F(11), .M(7), .K(4), .FL(FLW)) dut_w (.x(xw), .m(mw), .i(iw));
  fxp2vp #(.W(9),  .F(1),  .M(7), .K(2), .FL(FLY)) dut_y (.x(xy), .m(my), .i(iy));
  fxp2vp #(.W(8),  .F(1),  .M(6), .K(2), .FL(FLY)) dut_e (.x(xe), .m(me), .i(ie));

  task automatic check(string what, longint x, longint m_got, int i_got, int M,
                       longint m_exp, int i_exp);
    checks++;
    if (sext(m_got, M) != m_exp || i_got != i_exp) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s x=%0d: got m=%0d i=%0d, expected m=%0d i=%0d",
                 what, x, sext(m_got, M), i_got, m_exp, i_exp);
    end
  endtask

  int hist_w [4];
  int hist_y [2];

  initial begin
    longint m_exp;
    int i_exp;
    automatic int fle [8] = '{1, -1, 0, 0, 0, 0, 0, 0};
    for (int v = 0; v < 4096; v++) begin
      xw = 12'(v);
      #1;
      w_to_vp(sext(v, 12), m_exp, i_exp);
      check("W", sext(v, 12), mw, iw, 7, m_exp, i_exp);
      hist_w[iw]++;
    end
    for (int v = 0; v < 512; v++) begin
      xy = 9'(v);
      #1;
      y_to_vp(sext(v, 9), m_exp, i_exp);
      check("Y", sext(v, 9), my, iy, 7, m_exp, i_exp);
      hist_y[iy]++;
    end
    for (int v = 0; v < 256; v++) begin
      xe = 8'(v);
      #1;
      to_vp(sext(v, 8), 1, 6, 2, fle, m_exp, i_exp);
      check("EX", sext(v, 8), me, ie, 6, m_exp, i_exp);
      // example: three equal MSBs give index 0 and the low 6 bits
      checks++;
      if ((xe[7:5] == 3'b111 || xe[7:5] == 3'b000) != (ie == 1'b0) ||
          (ie == 1'b0 && me != xe[5:0]) || (ie == 1'b1 && me != xe[7:2])) begin
        failures++;
        $display("FAIL example rule x=%b m=%b i=%0d", xe, me, ie);
      end
    end
    // every exponent option is used
    for (int k = 0; k < 4; k++) begin checks++; if (hist_w[k] == 0) failures++; end
    for (int k = 0; k < 2; k++) begin checks++; if (hist_y[k] == 0) failures++; end
    $display("W index histogram %0d %0d %0d %0d, y index histogram %0d %0d",
             hist_w[0], hist_w[1], hist_w[2], hist_w[3], hist_y[0], hist_y[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
