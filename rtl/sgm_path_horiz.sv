// sgm_path_horiz: 0-degree (left-to-right) path aggregation, four pixels
// per clock.
//
// The exact recursion would chain four aggregation units in one cycle.
// Instead, only the last pixel's path cost of the previous word,
// L_r(p_last,d), is fed back: the estimator derives an approximate
// previous-pixel cost for pixels 2..4 of the word from it and the word's
// matching costs, and four aggregation units then run side by side. The
// fourth unit's result becomes L_r(p_last,d) for the next word. This is
// the paper's proposed 4ppc modification. At the first word of a line the
// feedback is replaced by zeros, so the path restarts with L = C there
// (a choice of this implementation; the paper does not discuss line
// starts).
//
// Timing: two cycles from in_* to out_* (input register, then the
// estimator + aggregation units into the output register, which also
// holds the feedback). One word per clock, gaps allowed.
module sgm_path_horiz
  import sgm_pkg::*;
#(
  parameter int WIDTH       = sgm_pkg::DEF_WIDTH,
  parameter int HEIGHT      = sgm_pkg::DEF_HEIGHT,
  parameter int DISP        = sgm_pkg::DEF_DISP,
  parameter int LAMBDA_LOG2 = 2
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic                        in_sof,
  input  cost_t  [PPC-1:0][DISP-1:0]  in_cost,
  input  lcost_t                      p1,
  input  lcost_t                      p2,
  output logic                        out_valid,
  output logic                        out_sof,
  output lcost_t [PPC-1:0][DISP-1:0]  out_l
);
  localparam int NW = WIDTH / PPC;

  logic [$clog2(NW)-1:0]     col;
  logic [$clog2(HEIGHT)-1:0] row;

  sgm_stream_pos #(.NW(NW), .HEIGHT(HEIGHT)) u_pos (
    .clk, .rst_n, .valid(in_valid), .sof(in_sof), .col, .row);

  logic                       va_q, sofa_q, first_a_q;
  cost_t [PPC-1:0][DISP-1:0]  ca_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      va_q      <= 1'b0;
      sofa_q    <= 1'b0;
      first_a_q <= 1'b0;
      ca_q      <= '0;
    end else begin
      va_q   <= in_valid;
      sofa_q <= in_sof & in_valid;
      if (in_valid) begin
        ca_q      <= in_cost;
        first_a_q <= (col == '0);
      end
    end
  end

  lcost_t [DISP-1:0]          l_last;
  lcost_t [PPC-1:0][DISP-1:0] l_est, l_new;

  assign l_last = first_a_q ? '0 : out_l[PPC-1];

  sgm_l_estimator #(.DISP(DISP), .LAMBDA_LOG2(LAMBDA_LOG2)) u_est (
    .l_last, .c(ca_q[PPC-2:0]), .l_est);

  for (genvar j = 0; j < PPC; j++) begin : g_unit
    sgm_agg_unit #(.DISP(DISP)) u_agg (
      .lprev(l_est[j]), .c(ca_q[j]), .p1, .p2, .l(l_new[j]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      out_l     <= '0;
    end else begin
      out_valid <= va_q;
      out_sof   <= sofa_q;
      if (va_q) out_l <= l_new;
    end
  end
endmodule
