// sgm_l_estimator: estimate of the previous pixel's 0-degree path cost for
// each pixel of a 4ppc word.
//
// On the horizontal path the previous pixel of pixels 2..4 of a word lies
// in the same word, so its exact path cost is not yet known. Following the
// paper, it is estimated from L = L_r(p_last,d), the exact cost of the last
// pixel of the previous word, and the matching costs C1..C3 of the earlier
// pixels of the current word:
//
//   L'(p1-r) = L
//   L'(p2-r) = L + (C1 - L) / lambda
//   L'(p3-r) = L + ((C1+C2)/2 - L) / lambda
//   L'(p4-r) = L + ((C1+C2)/4 + (C3/2 - L)) / lambda
//
// lambda = 2**LAMBDA_LOG2. Every division is a shift: /2 and /4 of the
// non-negative sums truncate, /lambda of the signed difference is an
// arithmetic shift (rounds toward minus infinity). The grouping of the
// last line is the one of the paper's estimator diagram, so the longest
// path is three adders/subtractors. The result lies between min(L, X) and
// max(L, X) for X the averaged matching cost, so it always fits LW bits.
// The paper leaves lambda open (any power of two); the default 4 is this
// implementation's choice. Combinational, all disparities in parallel.
module sgm_l_estimator
  import sgm_pkg::*;
#(
  parameter int DISP        = sgm_pkg::DEF_DISP,
  parameter int LAMBDA_LOG2 = 2
) (
  input  lcost_t [DISP-1:0]          l_last,  // L_r(p_last, d)
  input  cost_t  [PPC-2:0][DISP-1:0] c,       // C(p1..p3, d)
  output lcost_t [PPC-1:0][DISP-1:0] l_est    // L'_r(p1..p4 - r, d)
);
  localparam int XW = LW + 3;   // signed working width
  typedef logic signed [XW-1:0] sx_t;

  for (genvar d = 0; d < DISP; d++) begin : g_d
    sx_t L, c1, c2, c3, s12, t2, t3, t4;
    always_comb begin
      L   = sx_t'({1'b0, l_last[d]});
      c1  = sx_t'({1'b0, c[0][d]});
      c2  = sx_t'({1'b0, c[1][d]});
      c3  = sx_t'({1'b0, c[2][d]});
      s12 = c1 + c2;
      t2  = (c1 - L) >>> LAMBDA_LOG2;
      t3  = ((s12 >>> 1) - L) >>> LAMBDA_LOG2;
      t4  = ((s12 >>> 2) + ((c3 >>> 1) - L)) >>> LAMBDA_LOG2;
      l_est[0][d] = l_last[d];
      l_est[1][d] = lcost_t'(L + t2);
      l_est[2][d] = lcost_t'(L + t3);
      l_est[3][d] = lcost_t'(L + t4);
    end
  end
endmodule
