// bvp_mvm: VP-based CSPADE matrix-vector multiplier for beamspace
// equalization, s = W y, with B antennas and U users.
//
// The B complex input ports x_b carry either one row of the U x B
// equalization matrix W (lw = 1, FXP(12,11)) or one beamspace received
// vector y (lw = 0, FXP(9,1) in the low port bits). Loading W takes U
// consecutive cycles with lw = 1, row 0 first. After that, every cycle with
// lw = 0 is one equalization: s_u for all U users, one vector per cycle.
//
// Per port, cspade_thr flags small operands against the run-time thresholds
// tau_y / tau_w, and two vp_in_conv instances (real and imaginary part)
// turn the FXP input into the 7-bit-significand VP format of y or W. The
// converted samples and flags are broadcast to U dot product units. With
// sp = 1, lane products whose weight and sample are both small are skipped
// (counted as zero) to save power; with sp = 0 the result is the exact
// product of the VP-quantized operands.
//
// Timing: s_re/s_im hold the result for the vector applied 2 + log2(B)
// cycles earlier; s_valid marks them (lw low in that cycle, registers reset).
// Output format FXP(13+log2(B)+9, 12) per component, i.e. FXP(28,12) for
// B = 64, the exact sum. The block structure and the number formats of y
// and W follow the published B-VP design; the load protocol, the s_valid
// flag, the output format and reset are this design's choices.
module bvp_mvm #(
  parameter int B  = vp_pkg::B_DEF,
  parameter int U  = vp_pkg::U_DEF,
  parameter int XW = vp_pkg::XW_DEF,
  parameter int LV = (B <= 1) ? 0 : $clog2(B),
  parameter int SW = vp_pkg::PW_DEF + 1 + LV
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 lw,
  input  logic                 sp,
  input  logic [XW-1:0]        tau_y,
  input  logic [XW-1:0]        tau_w,
  input  logic [B-1:0][XW-1:0] x_re,
  input  logic [B-1:0][XW-1:0] x_im,
  output logic [U-1:0][SW-1:0] s_re,
  output logic [U-1:0][SW-1:0] s_im,
  output logic                 s_valid
);
  import vp_pkg::*;

  localparam int MX  = (MY_DEF > MW_DEF) ? MY_DEF : MW_DEF;
  localparam int EX  = ebits((KY_DEF > KW_DEF) ? KY_DEF : KW_DEF);
  localparam int LAT = 2 + LV;

  logic [B-1:0]         c;
  logic [B-1:0][MX-1:0] xr_m, xi_m;
  logic [B-1:0][EX-1:0] xr_i, xi_i;

  for (genvar b = 0; b < B; b++) begin : g_port
    cspade_thr #(.XW(XW), .WY(WY_DEF), .WW(WW_DEF)) u_thr (
      .lw, .tau_y, .tau_w, .x_re(x_re[b]), .x_im(x_im[b]), .c(c[b]));
    vp_in_conv #(.XW(XW)) u_conv_re (.lw, .x(x_re[b]), .m(xr_m[b]), .i(xr_i[b]));
    vp_in_conv #(.XW(XW)) u_conv_im (.lw, .x(x_im[b]), .m(xi_m[b]), .i(xi_i[b]));
  end

  for (genvar u = 0; u < U; u++) begin : g_dotp
    dotp #(.B(B), .U(U), .IDX(u), .LV(LV)) u_dotp (
      .clk, .rst_n, .lw, .sp, .c,
      .xr_m, .xr_i, .xi_m, .xi_i,
      .s_re(s_re[u]), .s_im(s_im[u]));
  end

  // Output valid: a y vector (lw = 0) entered LAT cycles ago
  logic [LAT-1:0] vld;
  always_ff @(posedge clk) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[LAT-2:0], !lw};
  end
  assign s_valid = vld[LAT-1];
endmodule
