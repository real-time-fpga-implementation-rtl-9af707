// sgm_cost_aggregation: the four SGM aggregation paths that can be
// computed on a video stream without buffering a frame: 0 degrees
// (sgm_path_horiz, with the 4ppc estimate), and 45, 90 and 135 degrees
// (sgm_path_line with DIR = -1, 0, +1). All four run on the same
// matching-cost word and have the same two-cycle latency, so their
// outputs are aligned; out_l[r] is path r in the order 0, 45, 90, 135.
// The choice of these four directions is the paper's; the other four would
// need a whole frame in external memory and are not built.
module sgm_cost_aggregation
  import sgm_pkg::*;
#(
  parameter int WIDTH       = sgm_pkg::DEF_WIDTH,
  parameter int HEIGHT      = sgm_pkg::DEF_HEIGHT,
  parameter int DISP        = sgm_pkg::DEF_DISP,
  parameter int LAMBDA_LOG2 = 2
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   in_valid,
  input  logic                                   in_sof,
  input  cost_t  [PPC-1:0][DISP-1:0]             in_cost,
  input  lcost_t                                 p1,
  input  lcost_t                                 p2,
  output logic                                   out_valid,
  output logic                                   out_sof,
  output lcost_t [NPATH-1:0][PPC-1:0][DISP-1:0]  out_l
);
  logic [NPATH-1:0] v, s;

  sgm_path_horiz #(.WIDTH(WIDTH), .HEIGHT(HEIGHT), .DISP(DISP),
                   .LAMBDA_LOG2(LAMBDA_LOG2)) u_p0 (
    .clk, .rst_n, .in_valid, .in_sof, .in_cost, .p1, .p2,
    .out_valid(v[0]), .out_sof(s[0]), .out_l(out_l[0]));

  for (genvar r = 1; r < NPATH; r++) begin : g_line
    sgm_path_line #(.WIDTH(WIDTH), .HEIGHT(HEIGHT), .DISP(DISP),
                    .DIR(r - 2)) u_p (
      .clk, .rst_n, .in_valid, .in_sof, .in_cost, .p1, .p2,
      .out_valid(v[r]), .out_sof(s[r]), .out_l(out_l[r]));
  end

  assign out_valid = v[0];
  assign out_sof   = s[0];

  a_aligned: assert property (@(posedge clk) disable iff (!rst_n)
                              v == {NPATH{v[0]}} && s == {NPATH{s[0]}});
endmodule
