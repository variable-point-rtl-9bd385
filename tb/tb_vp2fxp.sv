// tb_vp2fxp: exhaustive check of the VP-to-FXP converter.
//
// Instance 1 is the product converter of the SP-CM, VP(14, pairwise sums of
// [1,-1] and [11,9,7,6]) -> FXP(21,12); instance 2 is the small example
// VP(9,[3,1,2,0]) -> FXP(12,3) with an unsorted list. For every significand
// and index the output must equal m * 2^(F - f_i) as an integer.
module tb_vp2fxp;
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

  localparam int FLP [8] = '{12, 10, 8, 7, 10, 8, 6, 5};
  localparam int FLE [4] = '{3, 1, 2, 0};

  logic [13:0] mp; logic [2:0] ip; logic [20:0] xp;
  logic [8:0]  me; logic [1:0] ie; logic [11:0] xe;

  vp2fxp #(.M(14), .K(8), .FL(FLP), .W(21), .F(12)) dut_p (.m(mp), .i(ip), .x(xp));
  vp2fxp #(.M(9),  .K(4), .FL(FLE), .W(12), .F(3))  dut_e (.m(me), .i(ie), .x(xe));

  initial begin
    longint exp_v;
    for (int k = 0; k < 8; k++) begin
      for (int v = 0; v < (1 << 14); v++) begin
        mp = 14'(v); ip = 3'(k);
        #1;
        // FY[k/4] + FW[k%4] must be the list entry
        exp_v = sext(v, 14) <<< (12 - FLP[k]);
        checks++;
        if (sext(xp, 21) != exp_v ||
            FLP[k] != vp_pkg::FLY_DEF[k / 4] + vp_pkg::FLW_DEF[k % 4]) begin
          failures++;
          if (failures < 10) $display("FAIL P m=%0d i=%0d: x=%0d exp %0d", sext(v, 14), k, sext(xp, 21), exp_v);
        end
      end
    end
    for (int k = 0; k < 4; k++) begin
      for (int v = 0; v < 512; v++) begin
        me = 9'(v); ie = 2'(k);
        #1;
        exp_v = sext(v, 9) <<< (3 - FLE[k]);
        checks++;
        if (sext(xe, 12) != exp_v) begin
          failures++;
          if (failures < 10) $display("FAIL E m=%0d i=%0d: x=%0d exp %0d", sext(v, 9), k, sext(xe, 12), exp_v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
