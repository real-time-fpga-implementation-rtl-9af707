// sgm_census: census transform of one square context window.
//
// Every neighbour of the centre pixel gives one bit, set when the
// neighbour is greater than the centre (equal gives 0). Bits are packed in
// row-major reading order, top-left neighbour in the MSB, skipping the
// centre, so a 5x5 window gives a 24-bit vector. Purely combinational.
// The census/Hamming matching cost and the 5x5 window follow the paper;
// the "greater than" comparison is read off its worked example, the bit
// order is this implementation's choice (it does not change the Hamming
// distance as long as both images use the same order).
module sgm_census #(
  parameter int WIN = 5,
  parameter int PW  = 8
) (
  input  logic [WIN-1:0][WIN-1:0][PW-1:0] ctx,   // [row][col]
  output logic [WIN*WIN-2:0]              census
);
  localparam int C = WIN / 2;

  always_comb begin
    int n;
    n = WIN*WIN - 2;
    census = '0;
    for (int r = 0; r < WIN; r++) begin
      for (int c = 0; c < WIN; c++) begin
        if (!(r == C && c == C)) begin
          census[n] = (ctx[r][c] > ctx[C][C]);
          n--;
        end
      end
    end
  end
endmodule
