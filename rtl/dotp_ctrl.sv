// dotp_ctrl: row-load controller of one dot product unit.
//
// The U rows of the equalization matrix are streamed through the shared
// input ports in U consecutive cycles with lw = 1, row 0 first. Each DOTP
// counts the cycles of the current lw burst and raises its own load enable
// lw_u only in the cycle that carries its row IDX. The counter restarts
// whenever lw is low, so every new burst reloads the matrix from row 0.
// Only the existence of this controller is given by the published design;
// the streaming order and counter are this design's choice.
// lw_u is combinational from lw and the counter, aligned with the data. An
// assertion checks that lw_u is never set in two consecutive cycles.
module dotp_ctrl #(
  parameter int U   = vp_pkg::U_DEF,
  parameter int IDX = 0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic lw,
  output logic lw_u
);
  localparam int CW = $clog2(U + 1);
  logic [CW-1:0] cnt;

  always_ff @(posedge clk) begin
    if (!rst_n || !lw)             cnt <= '0;
    else if (cnt != CW'(U))        cnt <= cnt + 1'b1;
  end

  assign lw_u = lw && (cnt == CW'(IDX));

  // A row is taken at most once per burst.
  assert property (@(posedge clk) disable iff (!rst_n) lw_u |=> !lw_u)
    else $error("dotp_ctrl %0d: row loaded twice in one burst", IDX);
endmodule
