// sgm_matching_cost: matching cost determination for a 4ppc stereo stream.
//
// Both images go through a context generator (four 5x5 contexts per
// clock) and a census transform. The reference census vectors of the last
// PPC+DISP-1 = 67 pixels are kept in a shift register that advances by
// four pixels per valid word, so each of the four base pixels can be
// compared with all DISP reference pixels of its disparity range in the
// same cycle: C(p,d) = Hamming(census_b(x), census_m(x-d)), 4 x DISP
// Hamming distances per clock.
//
// The paper's figure writes the reference pixel as I_m(x+d); with the
// left (base) camera and the right (reference) camera of a rectified pair
// a point appears at x-d in the reference, which is what is built here
// (and which needs only past reference pixels). Reference pixels left of
// the line start are not masked: they are the previous line's last
// pixels (or zero after reset), so costs with x-d < 0 are meaningless.
//
// Timing: out_* follow in_* by four cycles (context generator 2, census
// register 1, Hamming register 1). out_cost[j][d] is the cost of pixel j
// of the word at disparity d.
module sgm_matching_cost
  import sgm_pkg::*;
#(
  parameter int WIDTH  = sgm_pkg::DEF_WIDTH,
  parameter int HEIGHT = sgm_pkg::DEF_HEIGHT,
  parameter int DISP   = sgm_pkg::DEF_DISP
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  logic                         in_sof,
  input  pixel_t [PPC-1:0]             in_base,
  input  pixel_t [PPC-1:0]             in_ref,
  output logic                         out_valid,
  output logic                         out_sof,
  output cost_t  [PPC-1:0][DISP-1:0]   out_cost
);
  localparam int HN = PPC + DISP - 1;   // reference census history, pixels

  logic                 vb, sofb, vm, sofm;
  context_t [PPC-1:0]   ctx_b, ctx_m;
  census_t  [PPC-1:0]   cen_b, cen_m;

  sgm_cntx_gen #(.WIDTH(WIDTH), .HEIGHT(HEIGHT)) u_cntx_b (
    .clk, .rst_n, .in_valid, .in_sof, .in_pix(in_base),
    .out_valid(vb), .out_sof(sofb), .out_ctx(ctx_b));

  sgm_cntx_gen #(.WIDTH(WIDTH), .HEIGHT(HEIGHT)) u_cntx_m (
    .clk, .rst_n, .in_valid, .in_sof, .in_pix(in_ref),
    .out_valid(vm), .out_sof(sofm), .out_ctx(ctx_m));

  for (genvar j = 0; j < PPC; j++) begin : g_census
    sgm_census #(.WIN(WIN), .PW(PW)) u_cb (.ctx(ctx_b[j]), .census(cen_b[j]));
    sgm_census #(.WIN(WIN), .PW(PW)) u_cm (.ctx(ctx_m[j]), .census(cen_m[j]));
  end

  // stage 3: base census of the word and the reference history.
  // hist_q[a] is the census of the reference pixel a positions before the
  // newest one (pixel 4m+3 of the current word m).
  logic                 v3_q, sof3_q;
  census_t [PPC-1:0]    cb_q;
  census_t [HN-1:0]     hist_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v3_q   <= 1'b0;
      sof3_q <= 1'b0;
      cb_q   <= '0;
      hist_q <= '0;
    end else begin
      v3_q   <= vb;
      sof3_q <= sofb;
      if (vb) begin
        cb_q <= cen_b;
        for (int a = HN-1; a >= PPC; a--) hist_q[a] <= hist_q[a-PPC];
        for (int j = 0; j < PPC; j++)     hist_q[PPC-1-j] <= cen_m[j];
      end
    end
  end

  // stage 4: Hamming distances. Pixel j of the word sits at age PPC-1-j,
  // its reference pixel at disparity d at age PPC-1-j+d.
  cost_t [PPC-1:0][DISP-1:0] cost;
  for (genvar j = 0; j < PPC; j++) begin : g_pix
    for (genvar d = 0; d < DISP; d++) begin : g_d
      sgm_hamming #(.N(CENSUS_BITS)) u_ham (
        .a(cb_q[j]), .b(hist_q[PPC-1-j+d]), .distance(cost[j][d]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      out_cost  <= '0;
    end else begin
      out_valid <= v3_q;
      out_sof   <= sof3_q;
      if (v3_q) out_cost <= cost;
    end
  end

  // both context generators run in lock step
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                               vb == vm && sofb == sofm);
endmodule
