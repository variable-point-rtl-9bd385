// cspade_thr: CSPADE thresholding for one antenna input.
//
// Flags the complex input on one port as "small" (c = 1) when both its real
// and its imaginary part have a magnitude below the threshold of the signal
// currently on the port: tau_w while a weight row is loaded (lw = 1), tau_y
// while a received vector is applied. A product in the SP-CM is skipped only
// when its weight and its y sample are both small, which is how the
// equalizer saves dynamic power on sparse beamspace data.
//
// A y sample is taken from the low WY bits of the port, a weight from the
// low WW bits, as in the input converters. Thresholds are unsigned, in LSBs
// of the respective fixed-point format. Using max(|Re|,|Im|) as the
// magnitude is this design's choice; the published design only states that
// small operands are detected against two run-time thresholds.
// Purely combinational.
module cspade_thr #(
  parameter int XW = vp_pkg::XW_DEF,
  parameter int WY = vp_pkg::WY_DEF,
  parameter int WW = vp_pkg::WW_DEF
) (
  input  logic          lw,
  input  logic [XW-1:0] tau_y,
  input  logic [XW-1:0] tau_w,
  input  logic [XW-1:0] x_re,
  input  logic [XW-1:0] x_im,
  output logic          c
);
  // magnitude of the low `w` bits of `v` read as two's complement
  function automatic logic [XW:0] mag(logic [XW-1:0] v, int w);
    logic signed [XW:0] s;
    s = signed'({v[XW-1], v});
    for (int b = 0; b <= XW; b++) begin
      if (b >= w) s[b] = v[w-1];      // sign-extend from bit w-1
    end
    return (s < 0) ? XW'(0) - s : s;
  endfunction

  logic [XW:0] mag_re, mag_im, tau;

  always_comb begin
    tau    = lw ? {1'b0, tau_w} : {1'b0, tau_y};
    mag_re = mag(x_re, lw ? WW : WY);
    mag_im = mag(x_im, lw ? WW : WY);
    c      = (mag_re < tau) && (mag_im < tau);
  end
endmodule
