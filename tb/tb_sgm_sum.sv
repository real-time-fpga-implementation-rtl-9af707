// tb_sgm_sum: sum of the four path costs, including the largest values
// (4 x 255 = 1020 must not overflow), and its one-cycle latency.
module tb_sgm_sum;
  import sgm_pkg::*;
  localparam int D = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_valid = 0, in_sof = 0, out_valid, out_sof;
  lcost_t [NPATH-1:0][PPC-1:0][D-1:0] in_l;
  scost_t [PPC-1:0][D-1:0] out_s;
  int exp [PPC][D];

  sgm_sum #(.DISP(D)) dut (.clk, .rst_n, .in_valid, .in_sof, .in_l, .out_valid, .out_sof, .out_s);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_l = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      in_valid = 1; in_sof = (t == 0);
      for (int j = 0; j < PPC; j++)
        for (int d = 0; d < D; d++) begin
          exp[j][d] = 0;
          for (int r = 0; r < NPATH; r++) begin
            in_l[r][j][d] = (t < 5) ? 8'd255 : lcost_t'($urandom);
            exp[j][d] += int'(in_l[r][j][d]);
          end
        end
      @(posedge clk); #1;
      checks++;
      if (!out_valid || out_sof != (t == 0)) begin failures++; $display("FAIL valid/sof t=%0d", t); end
      for (int j = 0; j < PPC; j++)
        for (int d = 0; d < D; d++) begin
          checks++;
          if (int'(out_s[j][d]) != exp[j][d]) begin
            failures++;
            if (failures < 10) $display("FAIL t=%0d j=%0d d=%0d got %0d exp %0d", t, j, d, out_s[j][d], exp[j][d]);
          end
        end
    end
    @(negedge clk); in_valid = 0; in_sof = 0;
    @(posedge clk); #1;
    checks++; if (out_valid) begin failures++; $display("FAIL valid stuck"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
