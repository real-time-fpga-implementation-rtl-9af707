// tb_sgm_path_line: streams random matching costs (two 16x4 frames,
// random gaps, two penalty settings) through the 0-degree path block and
// compares every path cost with the reference model, which applies the
// estimate equations for pixels 2..4 and restarts the path at each line.
// Also checks the two-cycle latency.
module tb_sgm_path_line;
  import sgm_pkg::*;
  import tb_sgm_model_pkg::*;
  localparam int W = 12, H = 5, D = 8, LG = 2, NW = W / PPC, LAT = 2;
  int checks = 0, failures = 0, gaps = 0;
  longint cyc = 0;

  logic clk = 0, rst_n = 0, in_valid = 0, in_sof = 0, out_valid, out_sof;
  cost_t  [PPC-1:0][D-1:0] in_cost;
  lcost_t [2:0][PPC-1:0][D-1:0] out_l;
  logic [2:0] ov, os;
  lcost_t p1, p2;

  for (genvar r = 0; r < 3; r++) begin : g_dut
    sgm_path_line #(.WIDTH(W), .HEIGHT(H), .DISP(D), .DIR(r - 1)) dut (
      .clk, .rst_n, .in_valid, .in_sof, .in_cost, .p1, .p2,
      .out_valid(ov[r]), .out_sof(os[r]), .out_l(out_l[r]));
  end
  assign out_valid = ov[0];
  assign out_sof   = os[0];

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  typedef struct { lcost_t [2:0][PPC-1:0][D-1:0] l; logic sof; longint t; } exp_t;
  exp_t q[$];
  sgm_model mdl;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin failures++; $display("FAIL unexpected output"); end
      else begin
        e = q.pop_front();
        if (out_l !== e.l) begin
          failures++;
          if (failures < 5) $display("FAIL L mismatch at cycle %0d: %h vs %h", cyc, out_l, e.l);
        end
        checks++;
        if (ov != 3'b111 || os != {3{out_sof}} || out_sof !== e.sof || cyc - e.t != LAT) begin
          failures++;
          $display("FAIL sof/latency %0d", cyc - e.t);
        end
      end
    end
  end

  initial begin
    in_cost = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      p1 = (f == 0) ? 8'd3 : 8'd10;
      p2 = (f == 0) ? 8'd20 : 8'd45;
      mdl = new(W, H, D, LG, int'(p1), int'(p2));
      for (int y = 0; y < H; y++) begin
        for (int x = 0; x < W; x++)
          for (int d = 0; d < D; d++)
            mdl.C[x][d] = (y % 2) ? $urandom % 25 : ((d == (x / 3) % D) ? 1 : 10 + $urandom % 15);
        mdl.row_paths(y);
        for (int k = 0; k < NW; k++) begin
          exp_t e;
          @(negedge clk);
          while ($urandom % 4 == 0) begin in_valid = 0; in_sof = 0; gaps++; @(negedge clk); end
          in_valid = 1;
          in_sof = (y == 0 && k == 0);
          for (int j = 0; j < PPC; j++)
            for (int d = 0; d < D; d++) begin
              in_cost[j][d] = cost_t'(mdl.C[4*k+j][d]);
              for (int r = 0; r < 3; r++) e.l[r][j][d] = lcost_t'(mdl.L[r+1][4*k+j][d]);
            end
          e.sof = in_sof; e.t = cyc;
          q.push_back(e);
        end
        @(negedge clk); in_valid = 0; in_sof = 0;
        repeat (2) @(negedge clk);
      end
    end
    repeat (10) @(posedge clk);
    checks++;
    if (q.size() != 0 || gaps == 0) begin failures++; $display("FAIL missing outputs or no gaps"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
