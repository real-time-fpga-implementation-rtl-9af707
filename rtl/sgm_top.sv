// sgm_top: Semi-Global Matching disparity estimation for a rectified
// stereo video stream in 4-pixel-per-clock format.
//
// Pipeline: matching cost (5x5 census + Hamming, 4 x DISP costs per
// clock) -> cost aggregation along the 0, 45, 90 and 135 degree paths
// (0 degrees with the 4ppc previous-pixel estimate) -> sum over paths ->
// argmin over disparities. One word of four base pixels and four
// reference pixels enters per valid clock; one word of four disparities
// leaves per valid clock, LATENCY = 8 cycles later (4 + 2 + 1 + 1).
// in_valid may drop at any time (horizontal and vertical blanking); in_sof
// marks the first word of each frame. The disparity at output stream
// position (x, y) belongs to image pixel (x-2, y-2) (see sgm_cntx_gen).
// Penalties P1 and P2 are run-time inputs; the paper gives no values.
// The block chain, the four paths and the 4ppc estimate on the 0-degree
// path follow the paper; the stream interface, widths, border handling and
// latencies are this design's choices.
//
// The video source (HDMI receiver) and sink sit outside this module and
// connect to the in_* / out_* stream ports.
module sgm_top
  import sgm_pkg::*;
#(
  parameter int WIDTH       = sgm_pkg::DEF_WIDTH,
  parameter int HEIGHT      = sgm_pkg::DEF_HEIGHT,
  parameter int DISP        = sgm_pkg::DEF_DISP,
  parameter int LAMBDA_LOG2 = 2,
  localparam int DW         = $clog2(DISP)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic                      in_sof,
  input  pixel_t [PPC-1:0]          in_base,   // I_b, left image
  input  pixel_t [PPC-1:0]          in_ref,    // I_m, right image
  input  lcost_t                    p1,
  input  lcost_t                    p2,
  output logic                      out_valid,
  output logic                      out_sof,
  output logic   [PPC-1:0][DW-1:0]  out_disp
);
  logic                                  cv, cs, av, as, sv, ss;
  cost_t  [PPC-1:0][DISP-1:0]            cost;
  lcost_t [NPATH-1:0][PPC-1:0][DISP-1:0] l;
  scost_t [PPC-1:0][DISP-1:0]            s;

  sgm_matching_cost #(.WIDTH(WIDTH), .HEIGHT(HEIGHT), .DISP(DISP)) u_cost (
    .clk, .rst_n, .in_valid, .in_sof, .in_base, .in_ref,
    .out_valid(cv), .out_sof(cs), .out_cost(cost));

  sgm_cost_aggregation #(.WIDTH(WIDTH), .HEIGHT(HEIGHT), .DISP(DISP),
                         .LAMBDA_LOG2(LAMBDA_LOG2)) u_agg (
    .clk, .rst_n, .in_valid(cv), .in_sof(cs), .in_cost(cost), .p1, .p2,
    .out_valid(av), .out_sof(as), .out_l(l));

  sgm_sum #(.DISP(DISP)) u_sum (
    .clk, .rst_n, .in_valid(av), .in_sof(as), .in_l(l),
    .out_valid(sv), .out_sof(ss), .out_s(s));

  sgm_disp_select #(.DISP(DISP)) u_sel (
    .clk, .rst_n, .in_valid(sv), .in_sof(ss), .in_s(s),
    .out_valid, .out_sof, .out_disp);

  // stream rule: a frame start is only meaningful on a valid word
  a_sof_valid: assert property (@(posedge clk) disable iff (!rst_n)
                                in_sof |-> in_valid)
    else $error("in_sof without in_valid");
endmodule
