// sgm_agg_unit: aggregation cost calculation unit for one path r and one
// pixel p, all disparities at once.
//
// One "Minimum (size: disp range)" tree finds min_k L(p-r,k) over the
// previous pixel's path costs; it is shared by DISP copies of the
// per-disparity cell (sgm_agg_cell), which evaluate the SGM recursion in
// parallel. Structure as in the paper's aggregation-unit diagram.
// Combinational: the path blocks around it place the registers.
//
// Interface: lprev[d] = L_r(p-r,d), c[d] = C(p,d), penalties P1 and P2;
// l[d] = L_r(p,d). An all-zero lprev gives l = c, which is how the path
// blocks start a path at the image border.
module sgm_agg_unit
  import sgm_pkg::*;
#(
  parameter int DISP = sgm_pkg::DEF_DISP
) (
  input  lcost_t [DISP-1:0] lprev,
  input  cost_t  [DISP-1:0] c,
  input  lcost_t            p1,
  input  lcost_t            p2,
  output lcost_t [DISP-1:0] l
);
  lcost_t lmin;

  sgm_min_tree #(.N(DISP), .W(LW)) u_min (.in(lprev), .out(lmin));

  for (genvar d = 0; d < DISP; d++) begin : g_cell
    sgm_agg_cell #(.CW(CW), .LW(LW)) u_cell (
      .l_d     (lprev[d]),
      .l_dm1   (lprev[(d > 0) ? d-1 : 0]),
      .l_dp1   (lprev[(d < DISP-1) ? d+1 : DISP-1]),
      .has_dm1 (d > 0),
      .has_dp1 (d < DISP-1),
      .l_min   (lmin),
      .c       (c[d]),
      .p1      (p1),
      .p2      (p2),
      .l       (l[d])
    );
  end
endmodule
