// tb_sgm_hamming: Hamming distance of the worked example (3) and of
// random, all-equal and all-different 24-bit census vectors.
module tb_sgm_hamming;
  import tb_sgm_model_pkg::*;
  int checks = 0, failures = 0;
  logic [23:0] a, b;
  logic [4:0]  dist_24;
  logic [7:0]  a8, b8;
  logic [3:0]  dist_8;

  sgm_hamming #(.N(24)) dut   (.a(a),  .b(b),  .distance(dist_24));
  sgm_hamming #(.N(8))  dut8  (.a(a8), .b(b8), .distance(dist_8));

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a8 = 8'b1110_1000; b8 = 8'b1111_0100;
    #1 check("example", dist_8, 3);
    a = 24'h0; b = 24'hFFFFFF;
    #1 check("all different", dist_24, 24);
    a = 24'h5A5A5A; b = 24'h5A5A5A;
    #1 check("equal", dist_24, 0);
    for (int t = 0; t < 2000; t++) begin
      a = 24'($urandom); b = 24'($urandom);
      #1 check("random", dist_24, popcount(64'(a ^ b)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
