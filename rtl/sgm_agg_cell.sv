// sgm_agg_cell: the per-disparity part of the path-cost recursion.
//
//   L(p,d) = C(p,d) + min( L(p-r,d),
//                          L(p-r,d-1) + P1,
//                          L(p-r,d+1) + P1,
//                          min_i L(p-r,i) + P2 ) - min_k L(p-r,k)
//
// Three adders, a minimum of four values, one adder for C and one
// subtractor for the shared minimum, as in the paper's block diagram of
// the aggregation unit. The neighbours d-1 / d+1 do not exist at the ends
// of the disparity range: the `has_dm1` / `has_dp1` inputs then replace
// them by the largest value. Arithmetic is one bit wider than a path cost;
// the result is saturated to LW bits (never reached when C <= 24 and
// P2 <= 231, since L <= C + P2). Combinational.
module sgm_agg_cell #(
  parameter int CW = 5,
  parameter int LW = 8
) (
  input  logic [LW-1:0] l_d,      // L(p-r, d)
  input  logic [LW-1:0] l_dm1,    // L(p-r, d-1)
  input  logic [LW-1:0] l_dp1,    // L(p-r, d+1)
  input  logic          has_dm1,
  input  logic          has_dp1,
  input  logic [LW-1:0] l_min,    // min_i L(p-r, i)
  input  logic [CW-1:0] c,        // C(p, d)
  input  logic [LW-1:0] p1,
  input  logic [LW-1:0] p2,
  output logic [LW-1:0] l         // L(p, d)
);
  logic [3:0][LW:0] cand;
  logic [LW:0]      m4;
  logic [LW+1:0]    acc;

  always_comb begin
    cand[0] = {1'b0, l_d};
    cand[1] = has_dm1 ? ({1'b0, l_dm1} + {1'b0, p1}) : '1;
    cand[2] = has_dp1 ? ({1'b0, l_dp1} + {1'b0, p1}) : '1;
    cand[3] = {1'b0, l_min} + {1'b0, p2};
  end

  sgm_min_tree #(.N(4), .W(LW+1)) u_min4 (.in(cand), .out(m4));

  always_comb begin
    acc = {1'b0, m4} + (LW+2)'(c) - (LW+2)'(l_min);
    l   = (acc > (LW+2)'({LW{1'b1}})) ? '1 : acc[LW-1:0];
  end
endmodule
