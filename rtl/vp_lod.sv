// vp_lod: leading-one detector of the FXP2VP converter.
//
// Returns the index of the lowest set bit of `valid` (bit 0 has priority), i.e.
// the first exponent option, in descending order of fractional length, whose
// overflow check passed. If no bit is set the last index K-1 is returned.
// Purely combinational.
module vp_lod #(
  parameter int K = 4,
  parameter int E = 2
) (
  input  logic [K-1:0] valid,
  output logic [E-1:0] idx
);
  always_comb begin
    idx = E'(K - 1);
    for (int k = K - 1; k >= 0; k--) begin
      if (valid[k]) idx = E'(k);
    end
  end
endmodule
