// vp_pkg: number formats and sizes shared by the variable-point (VP)
// beamspace equalizer.
//
// A VP number is a two's-complement significand m of M bits plus an
// exponent index i of E bits. The index points into a fixed exponent list f
// (fractional lengths), so the value is m * 2^-f[i]. The list is not carried
// by the hardware: it is a parameter of the converters.
//
// The defaults are the formats of the VP beamspace equalizer of the design
// this RTL follows: received vector y as FXP(9,1) converted to
// VP(7,[1,-1]), equalization matrix W as FXP(12,11) converted to
// VP(7,[11,9,7,6]), B = 64 antennas and U = 8 users. The product format
// FXP(21,12) and everything downstream of it are choices of this RTL: they
// keep every product and sum exact.
package vp_pkg;

  // System size
  localparam int B_DEF = 64;   // antennas (input ports)
  localparam int U_DEF = 8;    // users (dot product units)

  // Received vector y: FXP(WY,FY) -> VP(MY, FLY)
  localparam int WY_DEF = 9;
  localparam int FY_DEF = 1;
  localparam int MY_DEF = 7;
  localparam int KY_DEF = 2;
  localparam int FLY_DEF [KY_DEF] = '{1, -1};

  // Equalization matrix W: FXP(WW,FW) -> VP(MW, FLW)
  localparam int WW_DEF = 12;
  localparam int FW_DEF = 11;
  localparam int MW_DEF = 7;
  localparam int KW_DEF = 4;
  localparam int FLW_DEF [KW_DEF] = '{11, 9, 7, 6};

  // Width of a shared input port: wide enough for either format
  localparam int XW_DEF = (WY_DEF > WW_DEF) ? WY_DEF : WW_DEF;

  // Real product after VP2FXP: FXP(PW_DEF, PF_DEF), lossless
  localparam int PW_DEF = 21;
  localparam int PF_DEF = 12;

  // Number of bits of an exponent index for a list of K entries (E >= 1)
  function automatic int ebits(int k);
    return (k <= 2) ? 1 : $clog2(k);
  endfunction

endpackage
