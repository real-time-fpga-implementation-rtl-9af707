// sgm_path_line: path aggregation along a path that enters each pixel from
// the previous line: 45 degrees (DIR = -1, from the upper-left pixel),
// 90 degrees (DIR = 0, from the pixel above) or 135 degrees (DIR = +1,
// from the upper-right pixel).
//
// The path costs of a whole line are kept in a line memory of NW words,
// each holding L_r(p,d) of four pixels and all disparities. While word k
// of line y arrives, word k+1 of line y-1 is read (at the last word of a
// line the read wraps to word 0, which by then already holds line y's
// first word, the one the next line starts with). Two registers keep
// words k-1 and k of line y-1, so the previous-line neighbour of every
// pixel of the word, x-1, x or x+1, is at hand. Four aggregation units
// compute L_r for the word, which is written back to address k.
// There is no dependency inside a line, so this path needs no estimate.
// Pixels whose predecessor lies outside the frame (first line, first
// column for DIR=-1, last column for DIR=+1) start the path with L = C
// (zero predecessor costs). The line memory and the 45/90/135 paths
// follow the paper; addressing and border handling are this
// implementation's choices. Needs at least three words per line.
//
// Timing: two cycles from in_* to out_*, as in sgm_path_horiz.
module sgm_path_line
  import sgm_pkg::*;
#(
  parameter int WIDTH  = sgm_pkg::DEF_WIDTH,
  parameter int HEIGHT = sgm_pkg::DEF_HEIGHT,
  parameter int DISP   = sgm_pkg::DEF_DISP,
  parameter int DIR    = 0
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
  typedef lcost_t [PPC-1:0][DISP-1:0] lword_t;

  logic [$clog2(NW)-1:0]     col;
  logic [$clog2(HEIGHT)-1:0] row;

  sgm_stream_pos #(.NW(NW), .HEIGHT(HEIGHT)) u_pos (
    .clk, .rst_n, .valid(in_valid), .sof(in_sof), .col, .row);

  lword_t mem [NW];
  lword_t rd_q;
  logic [$clog2(NW)-1:0] rd_addr;

  assign rd_addr = (col == $clog2(NW)'(NW - 1)) ? '0 : col + 1'b1;

  always_ff @(posedge clk) begin
    if (in_valid) rd_q <= mem[rd_addr];
  end

  logic                       va_q, sofa_q, first_row_q, first_col_q, last_col_q;
  logic [$clog2(NW)-1:0]      cola_q;
  cost_t [PPC-1:0][DISP-1:0]  ca_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      va_q        <= 1'b0;
      sofa_q      <= 1'b0;
      first_row_q <= 1'b0;
      first_col_q <= 1'b0;
      last_col_q  <= 1'b0;
      cola_q      <= '0;
      ca_q        <= '0;
    end else begin
      va_q   <= in_valid;
      sofa_q <= in_sof & in_valid;
      if (in_valid) begin
        ca_q        <= in_cost;
        cola_q      <= col;
        first_row_q <= (row == '0);
        first_col_q <= (col == '0);
        last_col_q  <= (col == $clog2(NW)'(NW - 1));
      end
    end
  end

  // previous line, words k-1, k, k+1 as 3*PPC pixels
  lword_t win_m1_q, win_0_q;
  lcost_t [3*PPC-1:0][DISP-1:0] prev_line;
  lcost_t [PPC-1:0][DISP-1:0]   lprev, l_new;

  always_comb begin
    for (int i = 0; i < PPC; i++) begin
      prev_line[i]         = first_col_q ? '0 : win_m1_q[i];
      prev_line[PPC+i]     = win_0_q[i];
      prev_line[2*PPC+i]   = last_col_q ? '0 : rd_q[i];
    end
    for (int j = 0; j < PPC; j++)
      lprev[j] = first_row_q ? '0 : prev_line[PPC + j + DIR];
  end

  for (genvar j = 0; j < PPC; j++) begin : g_unit
    sgm_agg_unit #(.DISP(DISP)) u_agg (
      .lprev(lprev[j]), .c(ca_q[j]), .p1, .p2, .l(l_new[j]));
  end

  always_ff @(posedge clk) begin
    if (va_q) mem[cola_q] <= l_new;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win_m1_q  <= '0;
      win_0_q   <= '0;
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      out_l     <= '0;
    end else begin
      out_valid <= va_q;
      out_sof   <= sofa_q;
      if (va_q) begin
        win_m1_q <= win_0_q;
        win_0_q  <= rd_q;
        out_l    <= l_new;
      end
    end
  end

  initial begin
    assert (NW >= 3) else $error("sgm_path_line needs at least 3 words per line");
    assert (DIR >= -1 && DIR <= 1) else $error("DIR must be -1, 0 or +1");
  end
endmodule
