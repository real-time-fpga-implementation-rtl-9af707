// sgm_min_tree: minimum of N unsigned values as a balanced tree of
// two-input comparators (depth ceil(log2 N)). Unused leaves are filled
// with the largest value. Combinational. Used as the "Minimum (size:
// disp range)" block of the aggregation unit and as the "Minimum
// (size: 4)" inside each per-disparity cell. The paper names these blocks;
// the tree form and the tie rule (left input wins) are this design's.
module sgm_min_tree #(
  parameter int N = 64,
  parameter int W = 8
) (
  input  logic [N-1:0][W-1:0] in,
  output logic [W-1:0]        out
);
  localparam int LEVELS = (N > 1) ? $clog2(N) : 1;
  localparam int NP     = 1 << LEVELS;

  logic [W-1:0] node [2*NP-1];

  always_comb begin
    for (int i = 0; i < NP; i++) node[NP-1+i] = (i < N) ? in[i] : '1;
    for (int i = NP-2; i >= 0; i--)
      node[i] = (node[2*i+1] <= node[2*i+2]) ? node[2*i+1] : node[2*i+2];
    out = node[0];
  end
endmodule
