// fxp2vp: fixed-point to variable-point converter.
//
// Converts a W-bit two's-complement input x with F fractional bits into a VP
// number with an M-bit significand m and an exponent index i into the list
// FL (fractional lengths, sorted descending). For every option k the MSBs
// x[W-1 : M+(F-FL[k])-1] are tested for being all equal, which means the
// integer part of x fits into the M-FL[k] integer bits of the significand.
// A leading-one detector takes the first option that fits (largest
// fractional length, best precision) and that index selects the bit field
// x[(F-FL[k])+M-1 : F-FL[k]] as the significand. Dropped LSBs are truncated.
//
// The structure (equality checks, LOD, multiplexer) follows the published
// converter architecture; the fallback to index K-1 when no option fits is
// this design's choice and cannot happen when W-F = M-FL[K-1].
// An immediate assertion checks that the selected option fits whenever the
// parameters guarantee one does. Purely combinational, no clock.
module fxp2vp #(
  parameter int W  = 12,
  parameter int F  = 11,
  parameter int M  = 7,
  parameter int K  = 4,
  parameter int FL [K] = '{11, 9, 7, 6},
  parameter int E  = vp_pkg::ebits(K)
) (
  input  logic [W-1:0] x,
  output logic [M-1:0] m,
  output logic [E-1:0] i
);
  logic [K-1:0]        fits;
  logic [K-1:0][M-1:0] cand;

  for (genvar k = 0; k < K; k++) begin : g_opt
    localparam int LO = F - FL[k];          // LSB position of the field
    localparam int CH = M + LO - 1;         // lowest MSB that must equal the sign
    if (LO < 0 || LO + M > W) begin : g_bad
      $error("fxp2vp: option %0d (f=%0d) does not fit FXP(%0d,%0d) with M=%0d", k, FL[k], W, F, M);
    end
    assign cand[k] = x[LO+M-1:LO];
    // all bits x[W-1:CH] equal (CH = W-1 leaves a single bit: always fits)
    assign fits[k] = (x[W-1:CH] == '0) || (x[W-1:CH] == '1);
  end

  vp_lod #(.K(K), .E(E)) u_lod (.valid(fits), .idx(i));

  assign m = cand[i];

  // With W-F = M-min(f) the last option always fits, so the chosen one does.
  always_comb begin
    if (W - F <= M - FL[K-1]) assert (fits[i]) else $error("fxp2vp: selected option does not fit");
  end
endmodule
