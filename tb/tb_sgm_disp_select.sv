// tb_sgm_disp_select: argmin over 64 summed costs per pixel: random
// costs, a planted unique minimum at every disparity, ties (smallest
// disparity must win) and the one-cycle latency.
module tb_sgm_disp_select;
  import sgm_pkg::*;
  localparam int D = 64;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_valid = 0, in_sof = 0, out_valid, out_sof;
  scost_t [PPC-1:0][D-1:0] in_s;
  logic [PPC-1:0][5:0] out_disp;
  int exp [PPC];

  sgm_disp_select #(.DISP(D)) dut (.clk, .rst_n, .in_valid, .in_sof, .in_s,
                                   .out_valid, .out_sof, .out_disp);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_s = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      in_valid = 1; in_sof = (t == 0);
      for (int j = 0; j < PPC; j++) begin
        for (int d = 0; d < D; d++)
          in_s[j][d] = (t % 3 == 2) ? scost_t'(100 + $urandom % 4) : scost_t'(50 + $urandom % 900);
        if (t % 3 == 1) in_s[j][(t + 17*j) % D] = scost_t'(7);
        exp[j] = 0;
        for (int d = 1; d < D; d++) if (in_s[j][d] < in_s[j][exp[j]]) exp[j] = d;
      end
      @(posedge clk); #1;
      checks++;
      if (!out_valid || out_sof != (t == 0)) begin failures++; $display("FAIL valid/sof t=%0d", t); end
      for (int j = 0; j < PPC; j++) begin
        checks++;
        if (int'(out_disp[j]) != exp[j]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d j=%0d got %0d exp %0d", t, j, out_disp[j], exp[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
