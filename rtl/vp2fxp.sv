// vp2fxp: variable-point to fixed-point converter.
//
// The M-bit significand m is placed in the top bits of a W-bit word (W-M
// zero LSBs appended) and shifted arithmetically right by
// S_k = (W-F) - (M-FL[k]) bits, one fixed shift per exponent option k; the
// exponent index i selects which shifted word is the FXP(W,F) output x. The
// list FL need not be sorted. The converter is exact when F >= max(FL) and
// W-F >= M-min(FL), which is checked at elaboration.
//
// The architecture (zero pad, constant shifters, multiplexer) follows the
// published converter. The default parameters convert the product of a
// VP(7,[1,-1]) y and a VP(7,[11,9,7,6]) weight, whose exponent list is the
// pairwise sum of the two lists with index {i_y, i_w}, into FXP(21,12);
// that output format is this design's choice. Purely combinational.
module vp2fxp #(
  parameter int M  = 14,
  parameter int K  = 8,
  parameter int FL [K] = '{12, 10, 8, 7, 10, 8, 6, 5},
  parameter int W  = 21,
  parameter int F  = 12,
  parameter int E  = vp_pkg::ebits(K)
) (
  input  logic [M-1:0] m,
  input  logic [E-1:0] i,
  output logic [W-1:0] x
);
  logic signed [W-1:0]        padded;
  logic        [K-1:0][W-1:0] shifted;

  assign padded = {m, {(W-M){1'b0}}};

  for (genvar k = 0; k < K; k++) begin : g_opt
    localparam int S = (W - F) - (M - FL[k]);
    if (S < 0 || S > W - M) begin : g_bad
      $error("vp2fxp: option %0d (f=%0d) does not fit FXP(%0d,%0d) with M=%0d", k, FL[k], W, F, M);
    end
    assign shifted[k] = padded >>> S;
  end

  always_comb begin
    x = shifted[K-1];
    for (int k = 0; k < K; k++) begin
      if (i == E'(k)) x = shifted[k];
    end
  end
endmodule
