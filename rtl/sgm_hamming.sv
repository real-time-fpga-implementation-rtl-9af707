// sgm_hamming: Hamming distance of two census vectors.
//
// The matching cost C(p,d) is the number of differing bits between the
// census vector of the base pixel and that of the reference pixel at
// disparity d: a XOR followed by a population count. Combinational; the
// result is at most N, so $clog2(N+1) bits wide. The census/Hamming cost
// is the paper's; the adder-chain popcount is left to synthesis to balance.
module sgm_hamming #(
  parameter int N = 24
) (
  input  logic [N-1:0]           a,
  input  logic [N-1:0]           b,
  output logic [$clog2(N+1)-1:0] distance
);
  always_comb begin
    logic [N-1:0] x;
    x = a ^ b;
    distance = '0;
    for (int i = 0; i < N; i++) distance = distance + $clog2(N+1)'(x[i]);
  end
endmodule
