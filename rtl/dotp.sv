// dotp: dot product unit computing one entry s_u = sum_b W[u][b] * y[b].
//
// Contains the row-load controller (dotp_ctrl, position IDX), B SP-CM (VP)
// lanes and two B-operand pipelined adder trees, one for the real and one
// for the imaginary parts. During a weight-load burst the controller lets
// row IDX into the lanes' weight registers; afterwards every cycle with
// lw = 0 takes a new received vector. The inputs are the VP-converted
// antenna samples (shared by all DOTPs) and the CSPADE flags c.
//
// Timing: the sum for a vector applied in cycle t is on s_re/s_im after
// 2 + LV rising edges (2 in the SP-CM, LV = log2(B) in the adder tree), one
// result per cycle. Output format FXP(PW+1+LV, PF), exact.
// The decomposition into CTRL, B SP-CMs and an adder tree follows the
// published design.
module dotp #(
  parameter int B   = vp_pkg::B_DEF,
  parameter int U   = vp_pkg::U_DEF,
  parameter int IDX = 0,
  parameter int MY  = vp_pkg::MY_DEF,
  parameter int KY  = vp_pkg::KY_DEF,
  parameter int FLY [KY] = vp_pkg::FLY_DEF,
  parameter int MW  = vp_pkg::MW_DEF,
  parameter int KW  = vp_pkg::KW_DEF,
  parameter int FLW [KW] = vp_pkg::FLW_DEF,
  parameter int PW  = vp_pkg::PW_DEF,
  parameter int PF  = vp_pkg::PF_DEF,
  parameter int MX  = (MY > MW) ? MY : MW,
  parameter int EX  = vp_pkg::ebits((KY > KW) ? KY : KW),
  parameter int LV  = (B <= 1) ? 0 : $clog2(B),
  parameter int SW  = PW + 1 + LV
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  lw,
  input  logic                  sp,
  input  logic [B-1:0]          c,
  input  logic [B-1:0][MX-1:0]  xr_m,
  input  logic [B-1:0][EX-1:0]  xr_i,
  input  logic [B-1:0][MX-1:0]  xi_m,
  input  logic [B-1:0][EX-1:0]  xi_i,
  output logic [SW-1:0]         s_re,
  output logic [SW-1:0]         s_im
);
  logic                lw_u;
  logic [B-1:0][PW:0]  p_re, p_im;

  dotp_ctrl #(.U(U), .IDX(IDX)) u_ctrl (.clk, .rst_n, .lw, .lw_u);

  for (genvar b = 0; b < B; b++) begin : g_cm
    sp_cm_vp #(
      .MY(MY), .KY(KY), .FLY(FLY), .MW(MW), .KW(KW), .FLW(FLW), .PW(PW), .PF(PF)
    ) u_cm (
      .clk, .rst_n, .lw(lw_u), .sp, .c(c[b]),
      .xr_m(xr_m[b]), .xr_i(xr_i[b]), .xi_m(xi_m[b]), .xi_i(xi_i[b]),
      .p_re(p_re[b]), .p_im(p_im[b]));
  end

  adder_tree #(.N(B), .IW(PW + 1), .LV(LV)) u_tree_re (.clk, .d(p_re), .s(s_re));
  adder_tree #(.N(B), .IW(PW + 1), .LV(LV)) u_tree_im (.clk, .d(p_im), .s(s_im));
endmodule
