// tb_dotp_ctrl: the row-load controllers of U = 8 DOTPs.
// Load bursts of different lengths (full, short, longer than U) are applied;
// in the k-th cycle of a burst exactly the controller with IDX = k must
// assert lw_u, and none outside a burst or after cycle U-1 of a burst.
module tb_dotp_ctrl;
  localparam int U = 8;

  int checks = 0, failures = 0;
  bit clk = 0;
  always #5 clk = !clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic rst_n, lw;
  logic [U-1:0] lw_u;

  for (genvar u = 0; u < U; u++) begin : g_u
    dotp_ctrl #(.U(U), .IDX(u)) dut (.clk, .rst_n, .lw, .lw_u(lw_u[u]));
  end

  int pos;  // cycle within the current burst

  initial begin
    int len;
    rst_n = 0; lw = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int burst = 0; burst < 200; burst++) begin
      len = (burst < 3) ? U : $urandom_range(1, U + 3);
      for (int k = 0; k < len; k++) begin
        lw = 1;
        #1;
        checks++;
        if (lw_u != ((k < U) ? (U'(1) << k) : '0)) begin
          failures++;
          if (failures < 10) $display("FAIL burst %0d cycle %0d: lw_u=%b", burst, k, lw_u);
        end
        @(posedge clk); #1;
      end
      repeat ($urandom_range(1, 3)) begin
        lw = 0;
        #1;
        checks++;
        if (lw_u != '0) failures++;
        @(posedge clk); #1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
