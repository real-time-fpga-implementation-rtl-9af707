// tb_sgm_agg_unit: the path-cost recursion for all 64 disparities against
// the reference model: random predecessor costs, predecessor costs with a
// single sharp minimum (selects the P1 and P2 terms), all-zero
// predecessors (path start, L = C) and large penalties.
module tb_sgm_agg_unit;
  import sgm_pkg::*;
  import tb_sgm_model_pkg::*;
  localparam int D = 64;
  int checks = 0, failures = 0;

  lcost_t [D-1:0] lprev, l;
  cost_t  [D-1:0] c;
  lcost_t         p1, p2;

  sgm_agg_unit #(.DISP(D)) dut (.lprev, .c, .p1, .p2, .l);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lp[], cc[], exp[];
    lp = new[D]; cc = new[D];
    for (int t = 0; t < 600; t++) begin
      int mode;
      mode = t % 4;
      p1 = lcost_t'((mode == 3) ? 20 + $urandom % 40 : 1 + $urandom % 15);
      p2 = lcost_t'((mode == 3) ? 100 + $urandom % 130 : int'(p1) + $urandom % 60);
      for (int d = 0; d < D; d++) begin
        case (mode)
          0: lp[d] = $urandom % 200;
          1: lp[d] = 150 + $urandom % 50;
          2: lp[d] = 0;
          default: lp[d] = $urandom % 256;
        endcase
        cc[d] = $urandom % 25;
      end
      if (mode == 1) lp[$urandom % D] = $urandom % 20;
      for (int d = 0; d < D; d++) begin lprev[d] = lcost_t'(lp[d]); c[d] = cost_t'(cc[d]); end
      #1;
      agg(lp, cc, int'(p1), int'(p2), exp);
      for (int d = 0; d < D; d++) begin
        checks++;
        if (int'(l[d]) != exp[d]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d d=%0d got %0d exp %0d", t, d, l[d], exp[d]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
