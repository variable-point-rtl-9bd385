// sp_cm_vp: CSPADE-enabled complex VP multiplier (SP-CM) of one DOTP lane.
//
// Holds one entry w of the equalization matrix and multiplies it with the
// matching entry y of each received vector: yw = (yR wR - yI wI) + j(yR wI + yI wR).
//
// Operation:
//  * Weight load: with lw = 1 the VP inputs (real and imaginary part) are
//    stored in the weight registers, and sp_ctrl stores the weight's
//    small-operand flag c.
//  * Streaming: with lw = 0 and the unit active (ua) the VP inputs are
//    stored in the y registers. Four vp_mult instances form the real
//    products of the significands with exponent index {y_i, w_i}; four
//    vp2fxp instances convert them to FXP(PW,PF) using the pairwise-sum
//    exponent list; one subtractor and one adder form Re and Im, which are
//    registered when ua1 is set. When the product was skipped (ua2 = 0) the
//    outputs are forced to zero, and the y and product registers kept their
//    old contents, so the multipliers did not toggle.
//
// Timing: a sample applied in cycle t appears on p_re/p_im after two rising
// edges (t+2). Interface: y uses the low EY index bits and the significand
// sign-extended to MX bits, as delivered by vp_in_conv.
// The register, multiplier, converter and output-mux structure follows the
// published SP-CM (VP); the product format FXP(21,12) and the reset policy
// (control registers reset, data registers not) are this design's choices.
module sp_cm_vp #(
  parameter int MY = vp_pkg::MY_DEF,
  parameter int KY = vp_pkg::KY_DEF,
  parameter int FLY [KY] = vp_pkg::FLY_DEF,
  parameter int MW = vp_pkg::MW_DEF,
  parameter int KW = vp_pkg::KW_DEF,
  parameter int FLW [KW] = vp_pkg::FLW_DEF,
  parameter int PW = vp_pkg::PW_DEF,
  parameter int PF = vp_pkg::PF_DEF,
  parameter int MX = (MY > MW) ? MY : MW,
  parameter int EX = vp_pkg::ebits((KY > KW) ? KY : KW)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            lw,
  input  logic            sp,
  input  logic            c,
  input  logic [MX-1:0]   xr_m,
  input  logic [EX-1:0]   xr_i,
  input  logic [MX-1:0]   xi_m,
  input  logic [EX-1:0]   xi_i,
  output logic [PW:0]     p_re,
  output logic [PW:0]     p_im
);
  localparam int EY = vp_pkg::ebits(KY);
  localparam int EW = vp_pkg::ebits(KW);
  localparam int KP = (1 << EY) * (1 << EW);   // product exponent options
  localparam int EP = EY + EW;

  typedef int plist_t [KP];

  // Exponent list of the product, index {i_y, i_w}: f_y[i_y] + f_w[i_w].
  // Index values beyond KY or KW (non-power-of-two lists) repeat the last entry.
  function automatic plist_t pair_sum();
    plist_t r;
    for (int a = 0; a < (1 << EY); a++) begin
      for (int b = 0; b < (1 << EW); b++) begin
        r[a * (1 << EW) + b] = FLY[(a < KY) ? a : KY - 1] + FLW[(b < KW) ? b : KW - 1];
      end
    end
    return r;
  endfunction

  localparam plist_t FLP = pair_sum();

  typedef struct packed {
    logic [MY-1:0] m;
    logic [EY-1:0] i;
  } vpy_t;

  typedef struct packed {
    logic [MW-1:0] m;
    logic [EW-1:0] i;
  } vpw_t;

  logic ua, ua1, ua2;
  vpw_t w_re, w_im;
  vpy_t y_re, y_im;

  sp_ctrl u_ctrl (.clk, .rst_n, .lw, .c, .sp, .ua, .ua1, .ua2);

  // Input registers: weights on lw, samples when active and not loading.
  // The low bits of the sign-extended inputs are the narrower format.
  always_ff @(posedge clk) begin
    if (lw) begin
      w_re <= '{m: xr_m[MW-1:0], i: xr_i[EW-1:0]};
      w_im <= '{m: xi_m[MW-1:0], i: xi_i[EW-1:0]};
    end
    if (ua && !lw) begin
      y_re <= '{m: xr_m[MY-1:0], i: xr_i[EY-1:0]};
      y_im <= '{m: xi_m[MY-1:0], i: xi_i[EY-1:0]};
    end
  end

  // Four real VP products: 0 = yI*wI, 1 = yR*wI, 2 = yI*wR, 3 = yR*wR
  logic [3:0][MY+MW-1:0] pm;
  logic [3:0][EP-1:0]    pi;
  logic [3:0][PW-1:0]    px;
  vpy_t                  opy [4];
  vpw_t                  opw [4];

  assign opy = '{y_im, y_re, y_im, y_re};
  assign opw = '{w_im, w_im, w_re, w_re};

  for (genvar k = 0; k < 4; k++) begin : g_rm
    vp_mult #(.MA(MY), .EA(EY), .MB(MW), .EB(EW)) u_rm (
      .a_m(opy[k].m), .a_i(opy[k].i), .b_m(opw[k].m), .b_i(opw[k].i),
      .p_m(pm[k]), .p_i(pi[k]));
    vp2fxp #(.M(MY + MW), .K(KP), .FL(FLP), .W(PW), .F(PF)) u_vp2fxp (
      .m(pm[k]), .i(pi[k]), .x(px[k]));
  end

  logic signed [PW:0] sum_re, sum_im;
  logic        [PW:0] r_re, r_im;

  assign sum_re = (PW+1)'(signed'(px[3])) - (PW+1)'(signed'(px[0]));
  assign sum_im = (PW+1)'(signed'(px[1])) + (PW+1)'(signed'(px[2]));

  always_ff @(posedge clk) begin
    if (ua1) begin
      r_re <= sum_re;
      r_im <= sum_im;
    end
  end

  assign p_re = ua2 ? r_re : '0;
  assign p_im = ua2 ? r_im : '0;
endmodule
