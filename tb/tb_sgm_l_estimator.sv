// tb_sgm_l_estimator: the 4ppc previous-pixel estimates against the
// estimate equations, for lambda = 1, 4 and 16 and for matching costs
// both above and below the previous path cost (negative differences
// exercise the arithmetic shift).
module tb_sgm_l_estimator;
  import sgm_pkg::*;
  import tb_sgm_model_pkg::*;
  localparam int D = 16;
  int checks = 0, failures = 0;

  lcost_t [D-1:0]          l_last;
  cost_t  [2:0][D-1:0]     c;
  lcost_t [3:0][D-1:0]     e0, e2, e4;

  sgm_l_estimator #(.DISP(D), .LAMBDA_LOG2(0)) dut0 (.l_last, .c, .l_est(e0));
  sgm_l_estimator #(.DISP(D), .LAMBDA_LOG2(2)) dut2 (.l_last, .c, .l_est(e2));
  sgm_l_estimator #(.DISP(D), .LAMBDA_LOG2(4)) dut4 (.l_last, .c, .l_est(e4));

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // hand-worked case: L = 40, C1 = 8, C2 = 12, C3 = 20, lambda = 4
    //   p2: 40 + floor((8-40)/4)        = 32
    //   p3: 40 + floor((10-40)/4)       = 32   (floor(-7.5) = -8)
    //   p4: 40 + floor((5 + 10 - 40)/4) = 33   (floor(-6.25) = -7)
    l_last = '0; c = '0;
    l_last[0] = 8'd40; c[0][0] = 5'd8; c[1][0] = 5'd12; c[2][0] = 5'd20;
    #1;
    check("hand p1", int'(e2[0][0]), 40);
    check("hand p2", int'(e2[1][0]), 32);
    check("hand p3", int'(e2[2][0]), 32);
    check("hand p4", int'(e2[3][0]), 33);
    for (int t = 0; t < 500; t++) begin
      for (int d = 0; d < D; d++) begin
        l_last[d] = lcost_t'((t % 2) ? $urandom % 256 : $urandom % 30);
        for (int k = 0; k < 3; k++) c[k][d] = cost_t'($urandom % 25);
      end
      #1;
      for (int d = 0; d < D; d++)
        for (int k = 0; k < 4; k++) begin
          int L, c1, c2, c3;
          L = int'(l_last[d]);
          c1 = int'(c[0][d]); c2 = int'(c[1][d]); c3 = int'(c[2][d]);
          check("lambda=1",  int'(e0[k][d]), est(k, L, c1, c2, c3, 0));
          check("lambda=4",  int'(e2[k][d]), est(k, L, c1, c2, c3, 2));
          check("lambda=16", int'(e4[k][d]), est(k, L, c1, c2, c3, 4));
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
