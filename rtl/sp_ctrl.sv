// sp_ctrl: CSPADE controller inside one SP-CM.
//
// While the SP-CM's weight is loaded (lw = 1) the weight's small-operand
// flag c is stored. In every cycle the unit is active (ua = 1) unless power
// saving is on (sp = 1) and both the stored weight flag and the current
// sample's flag are set: then the product would be nearly zero and is
// skipped. ua gates the SP-CM's input registers in the same cycle; ua1
// (one cycle later) enables the product register and ua2 (two cycles
// later) forces the SP-CM output to zero. The two delay registers and the
// stored flag follow the published SP-CTRL; the synchronous active-low reset
// is this design's choice.
module sp_ctrl (
  input  logic clk,
  input  logic rst_n,
  input  logic lw,
  input  logic c,
  input  logic sp,
  output logic ua,
  output logic ua1,
  output logic ua2
);
  logic c_w;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      c_w <= 1'b0;
      ua1 <= 1'b0;
      ua2 <= 1'b0;
    end else begin
      if (lw) c_w <= c;
      ua1 <= ua;
      ua2 <= ua1;
    end
  end

  assign ua = !(sp && c && c_w);
endmodule
