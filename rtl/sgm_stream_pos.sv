// sgm_stream_pos: position of the current word in a 4ppc video frame.
//
// The stream carries one word (PPC pixels) per cycle in which `valid` is
// high; `sof` marks the first word of a frame and restarts the count.
// `col` (word index in the line, 0..NW-1) and `row` (line, 0..HEIGHT-1)
// are combinational and describe the word presented in this cycle; the
// registers advance after every valid word and wrap at the end of a line
// and of a frame. Words outside valid cycles (blanking) are not counted.
// This counter is an implementation detail shared by the blocks that need
// to know where a line or a frame starts. The paper does not describe the
// stream's control signals; valid + start-of-frame is this design's choice.
module sgm_stream_pos #(
  parameter int unsigned NW     = 960,   // words per line
  parameter int unsigned HEIGHT = 2160   // lines per frame
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      valid,
  input  logic                      sof,
  output logic [$clog2(NW)-1:0]     col,
  output logic [$clog2(HEIGHT)-1:0] row
);
  logic [$clog2(NW)-1:0]     col_q;
  logic [$clog2(HEIGHT)-1:0] row_q;

  always_comb begin
    col = sof ? '0 : col_q;
    row = sof ? '0 : row_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col_q <= '0;
      row_q <= '0;
    end else if (valid) begin
      if (col == $clog2(NW)'(NW - 1)) begin
        col_q <= '0;
        row_q <= (row == $clog2(HEIGHT)'(HEIGHT - 1)) ? '0 : row + 1'b1;
      end else begin
        col_q <= col + 1'b1;
        row_q <= row;
      end
    end
  end
endmodule
