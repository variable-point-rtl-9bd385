// tb_adder_tree: streaming check of the pipelined adder tree.
// A 64-operand tree (22-bit inputs, 6 levels) and a 5-operand tree
// (padded to 8) get a new random operand set every cycle; each sum must
// appear exactly log2 of the padded size cycles later.
module tb_adder_tree;
  int checks = 0, failures = 0;
  bit clk = 0;
  always #5 clk = !clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int N1 = 64, IW1 = 22, L1 = 6;
  localparam int N2 = 5,  IW2 = 8,  L2 = 3;

  logic signed [N1-1:0][IW1-1:0] d1;
  logic signed [IW1+L1-1:0]      s1;
  logic signed [N2-1:0][IW2-1:0] d2;
  logic signed [IW2+L2-1:0]      s2;

  adder_tree #(.N(N1), .IW(IW1)) dut1 (.clk, .d(d1), .s(s1));
  adder_tree #(.N(N2), .IW(IW2)) dut2 (.clk, .d(d2), .s(s2));

  longint exp1 [$], exp2 [$];

  initial begin
    longint a;
    for (int n = 0; n < 2000; n++) begin
      a = 0;
      for (int k = 0; k < N1; k++) begin
        // mostly extreme values to exercise the widening
        d1[k] = (n % 3 == 0) ? {1'b1, {(IW1-1){1'b0}}} : IW1'($urandom);
        a += longint'(signed'(d1[k]));
      end
      exp1.push_back(a);
      a = 0;
      for (int k = 0; k < N2; k++) begin
        d2[k] = IW2'($urandom);
        a += longint'(signed'(d2[k]));
      end
      exp2.push_back(a);
      @(posedge clk);
      #1;
      // after n+1 edges the sum of set n+1-L is out
      if (n + 1 >= L1) begin
        checks++;
        if (longint'(s1) != exp1.pop_front()) begin
          failures++;
          if (failures < 10) $display("FAIL tree64 set %0d: %0d", n + 1 - L1, s1);
        end
      end
      if (n + 1 >= L2) begin
        checks++;
        if (longint'(s2) != exp2.pop_front()) begin
          failures++;
          if (failures < 10) $display("FAIL tree5 set %0d: %0d", n + 1 - L2, s2);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
