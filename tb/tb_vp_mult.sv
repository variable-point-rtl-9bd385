// tb_vp_mult: exhaustive check of the real VP multiplier (7 x 7 bits).
// Every significand pair with a random index pair is applied; the product
// significand must be the signed product and the index the concatenation
// {a_i, b_i}.
module tb_vp_mult;
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

  logic [6:0] a_m, b_m; logic [0:0] a_i; logic [1:0] b_i;
  logic [13:0] p_m; logic [2:0] p_i;

  vp_mult #(.MA(7), .EA(1), .MB(7), .EB(2)) dut (.a_m, .a_i, .b_m, .b_i, .p_m, .p_i);

  initial begin
    for (int a = 0; a < 128; a++) begin
      for (int b = 0; b < 128; b++) begin
        a_m = 7'(a); b_m = 7'(b); a_i = 1'($urandom); b_i = 2'($urandom);
        #1;
        checks++;
        if (sext(p_m, 14) != sext(a, 7) * sext(b, 7) || p_i != 3'(a_i * 4 + b_i)) begin
          failures++;
          if (failures < 10) $display("FAIL %0d*%0d = %0d idx %0d", sext(a, 7), sext(b, 7), sext(p_m, 14), p_i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
