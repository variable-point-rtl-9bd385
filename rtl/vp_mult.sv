// vp_mult: real-valued variable-point multiplier.
//
// Multiplies two VP numbers. The significands are multiplied as ordinary
// two's-complement integers (full width MA+MB, no rounding). The exponent
// of the product is not computed: the product's exponent list is the
// pairwise sum of the operand lists and is known when the design is built,
// so the product index is the concatenation {a_i, b_i} and the list lives in
// the VP2FXP converter that follows. Combinational.
module vp_mult #(
  parameter int MA = 7,
  parameter int EA = 1,
  parameter int MB = 7,
  parameter int EB = 2
) (
  input  logic [MA-1:0]    a_m,
  input  logic [EA-1:0]    a_i,
  input  logic [MB-1:0]    b_m,
  input  logic [EB-1:0]    b_i,
  output logic [MA+MB-1:0] p_m,
  output logic [EA+EB-1:0] p_i
);
  assign p_m = $signed(a_m) * $signed(b_m);
  assign p_i = {a_i, b_i};
endmodule
