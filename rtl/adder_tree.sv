// adder_tree -- global accumulation of the TriMLA outputs.
//
// Sums N signed IN_W-bit values in a balanced binary tree of log2(N) adder
// levels (N is rounded up to a power of two with zero leaves). The macro
// uses it once per output channel, after every TriMLA has finished its local
// accumulation, so the tree toggles once per channel rather than once per
// weight. Purely combinational: the caller registers the sum.
// From the paper: one adder tree shared by all 128 TriMLAs of a macro, fed
// once per channel. This design's choices: the balanced binary structure and
// full-precision (IN_W + log2 N) output.
module adder_tree #(
  parameter int unsigned N     = 128,
  parameter int unsigned IN_W  = 8,
  localparam int unsigned LV   = (N <= 1) ? 1 : $clog2(N),
  localparam int unsigned NP   = 1 << LV,
  localparam int unsigned OUT_W = IN_W + LV
) (
  input  logic signed [IN_W-1:0]  in  [N],
  output logic signed [OUT_W-1:0] sum
);

  logic signed [OUT_W-1:0] node [LV+1][NP];

  always_comb begin
    for (int l = 0; l <= LV; l++)
      for (int i = 0; i < NP; i++)
        node[l][i] = '0;
    for (int i = 0; i < N; i++)
      node[0][i] = OUT_W'(in[i]);
    for (int l = 0; l < LV; l++)
      for (int i = 0; i < (NP >> (l + 1)); i++)
        node[l+1][i] = node[l][2*i] + node[l][2*i+1];
    sum = node[LV][0];
  end

endmodule
