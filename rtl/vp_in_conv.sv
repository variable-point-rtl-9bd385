// vp_in_conv: input converter pair of one real-valued input port.
//
// The same port carries a weight W (during lw = 1) or a received sample y.
// Two fixed converters sit on it: FXP2VP-Y turns the low WY bits, read as
// FXP(WY,FY), into VP(MY,FLY); FXP2VP-W turns the low WW bits, FXP(WW,FW),
// into VP(MW,FLW). A multiplexer driven by lw forwards the weight conversion
// while a row is loaded and the y conversion otherwise. The outputs are
// sized for the wider of the two formats: significands are sign-extended,
// indices zero-extended. Two converters per port and the lw multiplexer
// follow the published architecture; the placement of y in the low port bits
// is this design's choice. Purely combinational.
module vp_in_conv #(
  parameter int XW = vp_pkg::XW_DEF,
  parameter int WY = vp_pkg::WY_DEF,
  parameter int FY = vp_pkg::FY_DEF,
  parameter int MY = vp_pkg::MY_DEF,
  parameter int KY = vp_pkg::KY_DEF,
  parameter int FLY [KY] = vp_pkg::FLY_DEF,
  parameter int WW = vp_pkg::WW_DEF,
  parameter int FW = vp_pkg::FW_DEF,
  parameter int MW = vp_pkg::MW_DEF,
  parameter int KW = vp_pkg::KW_DEF,
  parameter int FLW [KW] = vp_pkg::FLW_DEF,
  parameter int MX = (MY > MW) ? MY : MW,
  parameter int EX = vp_pkg::ebits((KY > KW) ? KY : KW)
) (
  input  logic          lw,
  input  logic [XW-1:0] x,
  output logic [MX-1:0] m,
  output logic [EX-1:0] i
);
  localparam int EY = vp_pkg::ebits(KY);
  localparam int EW = vp_pkg::ebits(KW);

  logic [MY-1:0] y_m;
  logic [EY-1:0] y_i;
  logic [MW-1:0] w_m;
  logic [EW-1:0] w_i;

  fxp2vp #(.W(WY), .F(FY), .M(MY), .K(KY), .FL(FLY)) u_fxp2vp_y (
    .x(x[WY-1:0]), .m(y_m), .i(y_i));
  fxp2vp #(.W(WW), .F(FW), .M(MW), .K(KW), .FL(FLW)) u_fxp2vp_w (
    .x(x[WW-1:0]), .m(w_m), .i(w_i));

  always_comb begin
    if (lw) begin
      m = MX'(signed'(w_m));
      i = EX'(w_i);
    end else begin
      m = MX'(signed'(y_m));
      i = EX'(y_i);
    end
  end
endmodule
