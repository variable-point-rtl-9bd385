// adder_tree: N-operand pipelined adder tree.
//
// Sums N signed IW-bit operands. The operands are padded with zeros to the
// next power of two NP, then added pairwise in LV = log2(NP) levels with a
// register after every level, so the sum of the operands presented in cycle
// t appears on s after LV rising edges and a new set can be accepted every
// cycle. The sum is exact: the output has IW+LV bits. One pipeline register
// per level is this design's choice; the published design only calls the
// tree internally pipelined. No reset: the data registers are flushed by
// the stream itself.
module adder_tree #(
  parameter int N  = vp_pkg::B_DEF,
  parameter int IW = vp_pkg::PW_DEF + 1,
  parameter int LV = (N <= 1) ? 0 : $clog2(N)
) (
  input  logic                       clk,
  input  logic signed [N-1:0][IW-1:0] d,
  output logic signed [IW+LV-1:0]    s
);
  localparam int NP = 1 << LV;
  localparam int OW = IW + LV;

  for (genvar l = 0; l <= LV; l++) begin : g_lvl
    logic signed [OW-1:0] v [NP >> l];
    if (l == 0) begin : g_in
      for (genvar n = 0; n < NP; n++) begin : g_op
        if (n < N) begin : g_used
          assign v[n] = OW'(signed'(d[n]));
        end else begin : g_pad
          assign v[n] = '0;
        end
      end
    end else begin : g_add
      for (genvar n = 0; n < (NP >> l); n++) begin : g_node
        always_ff @(posedge clk) v[n] <= g_lvl[l-1].v[2*n] + g_lvl[l-1].v[2*n+1];
      end
    end
  end

  assign s = g_lvl[LV].v[0];
endmodule
