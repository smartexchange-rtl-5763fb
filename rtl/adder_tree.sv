// adder_tree: the adder tree at the bottom of a PE slice.
//
// Each PE line of a slice leaves one partial sum per MAC column; the slice's
// output for that column is the sum over its N = DIM_C lines (the lines work
// on different input channels of the same filter). This module adds N signed
// inputs as a balanced binary tree of ceil(log2 N) adder levels (inputs padded
// with zeros up to a power of two). Combinational; the slice registers the
// result in its accumulation buffer.
// The source names the adder tree and its position; its structure here (a
// plain balanced tree, one per column, sign-extended) is this design's choice.
module adder_tree #(
  parameter int unsigned N     = 16,
  parameter int unsigned W_IN  = 24,
  parameter int unsigned W_OUT = 32
) (
  input  logic signed [N-1:0][W_IN-1:0] in,
  output logic signed [W_OUT-1:0]       sum
);
  localparam int unsigned LV = (N <= 1) ? 1 : $clog2(N);
  localparam int unsigned NP = 1 << LV;

  logic signed [W_OUT-1:0] lvl [LV+1][NP];

  always_comb begin
    for (int i = 0; i < NP; i++)
      lvl[0][i] = (i < N) ? W_OUT'(signed'(in[i])) : '0;
    for (int l = 1; l <= LV; l++)
      for (int i = 0; i < NP; i++)
        lvl[l][i] = (i < (NP >> l)) ? lvl[l-1][2*i] + lvl[l-1][2*i+1] : '0;
  end

  assign sum = lvl[LV][0];
endmodule
