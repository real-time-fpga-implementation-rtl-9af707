// sgm_cntx_gen: 5x5 context generator for a 4ppc video stream.
//
// For every input word (4 horizontally adjacent pixels of line y, columns
// 4k..4k+3) it outputs four 5x5 contexts, one per pixel. Pixel j of the
// output word is centred on image pixel (4k+j-2, y-2): the window covers
// lines y-4..y and columns 4k+j-4..4k+j, i.e. only pixels that have
// already arrived, so no future data is needed and every input word gives
// one output word. The resulting two-line, two-column offset between a
// stream position and its context centre is the same for the base and
// the reference image and for every later stage.
//
// Structure: WIN-1 line buffers packed side by side in one memory of NW
// words (one block-RAM-style read-modify-write per word: read the four
// stored lines, write back the three newest plus the incoming line), and
// a register holding the previous 5-line column word, which together with
// the current one forms an 8-pixel-wide, 5-line window. Window pixels
// above the first line or left of the first column of the frame read as 0.
//
// Timing: out_* follow in_* by two cycles, one per valid word, gaps in
// in_valid (blanking) pass through. The 5x5 window and the four contexts
// per clock follow the paper; buffer organisation, border handling and
// the centre offset are this implementation's choices.
module sgm_cntx_gen
  import sgm_pkg::*;
#(
  parameter int WIDTH  = sgm_pkg::DEF_WIDTH,
  parameter int HEIGHT = sgm_pkg::DEF_HEIGHT
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 in_sof,
  input  pixel_t   [PPC-1:0]   in_pix,
  output logic                 out_valid,
  output logic                 out_sof,
  output context_t [PPC-1:0]   out_ctx
);
  localparam int NW = WIDTH / PPC;
  localparam int NL = WIN - 1;                 // stored lines
  localparam int HW = PPC + WIN - 1;           // window width, 8 pixels

  typedef pixel_t [PPC-1:0] word_t;            // one line, one word
  typedef word_t  [NL-1:0]  lines_t;           // [0] = oldest line
  typedef word_t  [WIN-1:0] column_t;          // [0] = line y-4, [4] = line y

  logic [$clog2(NW)-1:0]     col;
  logic [$clog2(HEIGHT)-1:0] row;

  sgm_stream_pos #(.NW(NW), .HEIGHT(HEIGHT)) u_pos (
    .clk, .rst_n, .valid(in_valid), .sof(in_sof), .col, .row);

  lines_t mem [NW];
  lines_t rd_q;

  // stage 1 registers
  logic                      v1_q, sof1_q;
  word_t                     cur_q;
  logic [$clog2(NW)-1:0]     col1_q;
  logic [$clog2(HEIGHT)-1:0] row1_q;

  always_ff @(posedge clk) begin
    if (in_valid) rd_q <= mem[col];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1_q   <= 1'b0;
      sof1_q <= 1'b0;
      cur_q  <= '0;
      col1_q <= '0;
      row1_q <= '0;
    end else begin
      v1_q   <= in_valid;
      sof1_q <= in_sof & in_valid;
      if (in_valid) begin
        cur_q  <= in_pix;
        col1_q <= col;
        row1_q <= row;
      end
    end
  end

  // stage 1: assemble the 5-line column, masked above the frame
  column_t colw, colw_prev_q;
  always_comb begin
    for (int i = 0; i < NL; i++)
      colw[i] = (int'(row1_q) >= NL - i) ? rd_q[i] : '0;
    colw[NL] = cur_q;
  end

  // line buffer write-back: drop the oldest line, append the new one
  always_ff @(posedge clk) begin
    if (v1_q) mem[col1_q] <= {cur_q, rd_q[NL-1:1]};
  end

  // 8-pixel wide window: previous column word (zero at line start) + current
  logic [WIN-1:0][HW-1:0][PW-1:0] wide;
  always_comb begin
    for (int r = 0; r < WIN; r++)
      for (int i = 0; i < PPC; i++) begin
        wide[r][i]     = (col1_q == '0) ? '0 : colw_prev_q[r][i];
        wide[r][PPC+i] = colw[r][i];
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      colw_prev_q <= '0;
      out_valid   <= 1'b0;
      out_sof     <= 1'b0;
      out_ctx     <= '0;
    end else begin
      out_valid <= v1_q;
      out_sof   <= sof1_q;
      if (v1_q) begin
        colw_prev_q <= colw;
        for (int j = 0; j < PPC; j++)
          for (int r = 0; r < WIN; r++)
            for (int c = 0; c < WIN; c++)
              out_ctx[j][r][c] <= wide[r][j + c];
      end
    end
  end

  initial begin
    assert (WIDTH % PPC == 0) else $error("WIDTH must be a multiple of PPC");
  end
endmodule
