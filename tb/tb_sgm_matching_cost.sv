// tb_sgm_matching_cost: streams two 16x6 stereo frames (random gaps and
// line blanking) through the matching-cost block with a 16-level
// disparity range. The reference image is the base image shifted by a
// per-row disparity plus noise. Every cost C(p,d) is compared with the
// reference model (census of the 5x5 window ending at the stream
// position, Hamming distance to the reference pixel d positions earlier
// in the stream). Also checks the four-cycle latency, and that the
// expected cost at the planted disparity is zero wherever both windows
// lie fully inside the frame (a check of the model itself).
module tb_sgm_matching_cost;
  import sgm_pkg::*;
  import tb_sgm_model_pkg::*;
  localparam int W = 16, H = 6, D = 16, NW = W / PPC, LAT = 4;
  int checks = 0, failures = 0, gaps = 0, zero_hits = 0;
  longint cyc = 0;

  logic clk = 0, rst_n = 0, in_valid = 0, in_sof = 0, out_valid, out_sof;
  pixel_t [PPC-1:0] in_base, in_ref;
  cost_t  [PPC-1:0][D-1:0] out_cost;

  sgm_matching_cost #(.WIDTH(W), .HEIGHT(H), .DISP(D)) dut (
    .clk, .rst_n, .in_valid, .in_sof, .in_base, .in_ref, .out_valid, .out_sof, .out_cost);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  typedef struct { cost_t [PPC-1:0][D-1:0] c; logic sof; longint t; } exp_t;
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
        if (out_cost !== e.c) begin
          failures++;
          if (failures < 5) $display("FAIL cost mismatch at cycle %0d", cyc);
        end
        checks++;
        if (out_sof !== e.sof || cyc - e.t != LAT) begin
          failures++;
          $display("FAIL sof/latency %0d", cyc - e.t);
        end
      end
    end
  end

  initial begin
    in_base = '0; in_ref = '0;
    mdl = new(W, H, D, 2, 0, 0);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      // base: random texture; reference: base moved left by dt(y)
      for (int y = 0; y < H; y++) begin
        int dt;
        dt = f ? 7 : 3;
        for (int x = 0; x < W; x++) mdl.b[y][x] = 8'($urandom);
        for (int x = 0; x < W; x++)
          mdl.m[y][x] = (x + dt < W) ? mdl.b[y][x + dt] : 8'($urandom);
      end
      for (int y = 0; y < H; y++) begin
        int dt;
        dt = f ? 7 : 3;
        mdl.row_costs(y);
        if (y >= 4)
          for (int x = dt + 4; x < W; x++) begin
            checks++; zero_hits++;
            if (mdl.C[x][dt] != 0) begin failures++; $display("FAIL model: planted cost %0d", mdl.C[x][dt]); end
          end
        for (int k = 0; k < NW; k++) begin
          exp_t e;
          @(negedge clk);
          while ($urandom % 4 == 0) begin in_valid = 0; in_sof = 0; gaps++; @(negedge clk); end
          in_valid = 1;
          in_sof = (y == 0 && k == 0);
          for (int j = 0; j < PPC; j++) begin
            in_base[j] = mdl.b[y][4*k+j];
            in_ref[j]  = mdl.m[y][4*k+j];
            for (int d = 0; d < D; d++) e.c[j][d] = cost_t'(mdl.C[4*k+j][d]);
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
    if (q.size() != 0 || gaps == 0 || zero_hits == 0) begin failures++; $display("FAIL missing outputs or no gaps"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
