// tb_sgm_top: end-to-end test of the SGM pipeline at a reduced size
// (32x10 frames, 16 disparities, lambda = 4), two frames back to back
// with random gaps in in_valid and line blanking.
//
// The reference image is the base image moved left by a planted
// disparity (5 in the first frame, 11 in the second), with fresh noise
// where the moved image has no data. Every output disparity
// is compared with the reference model (census, 4-path aggregation with
// the 4ppc estimate, sum and argmin), and the latency of every word is
// checked against 8 cycles. As an independent check the share of interior
// pixels that recover the planted disparity is measured and must exceed
// 80 %. The test also counts how often each mechanism occurred and fails
// if one never did: blanking gaps, frame restarts, path starts at the
// frame's first line, P1 and P2 transitions, and 0-degree estimates that
// differ from the previous word's last path cost.
module tb_sgm_top;
  import sgm_pkg::*;
  import tb_sgm_model_pkg::*;
  localparam int W = 32, H = 10, D = 16, LG = 2, NW = W / PPC, LAT = 8, FRAMES = 2;
  localparam int DW = $clog2(D);
  int checks = 0, failures = 0;
  int gaps = 0, restarts = 0, first_rows = 0, planted_ok = 0, planted_n = 0;
  longint cyc = 0;

  logic clk = 0, rst_n = 0, in_valid = 0, in_sof = 0, out_valid, out_sof;
  pixel_t [PPC-1:0] in_base, in_ref;
  logic [PPC-1:0][DW-1:0] out_disp;
  lcost_t p1, p2;

  sgm_top #(.WIDTH(W), .HEIGHT(H), .DISP(D), .LAMBDA_LOG2(LG)) dut (
    .clk, .rst_n, .in_valid, .in_sof, .in_base, .in_ref, .p1, .p2,
    .out_valid, .out_sof, .out_disp);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  typedef struct { int d[PPC]; int planted[PPC]; logic sof; longint t; } exp_t;
  exp_t q[$];
  sgm_model mdl;

  int pd;   // planted disparity of the current frame

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
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
        for (int j = 0; j < PPC; j++) begin
          checks++;
          if (int'(out_disp[j]) != e.d[j]) begin
            failures++;
            if (failures < 8) $display("FAIL disparity got %0d expected %0d", out_disp[j], e.d[j]);
          end
          if (e.planted[j] >= 0) begin
            planted_n++;
            if (int'(out_disp[j]) == e.planted[j]) planted_ok++;
          end
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
    p1 = 8'd6; p2 = 8'd30;
    mdl = new(W, H, D, LG, int'(p1), int'(p2));
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < FRAMES; f++) begin
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) mdl.b[y][x] = 8'($urandom);
      pd = f ? 11 : 5;
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++)
          mdl.m[y][x] = (x + pd < W) ? mdl.b[y][x + pd] : 8'($urandom);
      if (f > 0) restarts++;
      for (int y = 0; y < H; y++) begin
        mdl.row_costs(y);
        mdl.row_paths(y);
        mdl.row_select();
        if (y == 0) first_rows++;
        for (int k = 0; k < NW; k++) begin
          exp_t e;
          @(negedge clk);
          while ($urandom % 5 == 0) begin in_valid = 0; in_sof = 0; gaps++; @(negedge clk); end
          in_valid = 1;
          in_sof = (y == 0 && k == 0);
          for (int j = 0; j < PPC; j++) begin
            int xi, yi;
            in_base[j] = mdl.b[y][4*k+j];
            in_ref[j]  = mdl.m[y][4*k+j];
            e.d[j] = mdl.disp[4*k+j];
            // stream position (x, y): windows end at (x, y) in the base
            // and at (x-pd, y) in the reference; count positions where
            // both lie inside the frame
            xi = 4*k + j; yi = y;
            e.planted[j] = (yi >= 4 && xi - pd >= 4) ? pd : -1;
          end
          e.sof = in_sof; e.t = cyc;
          q.push_back(e);
        end
        @(negedge clk); in_valid = 0; in_sof = 0;
        repeat (4) @(negedge clk);
      end
    end
    repeat (20) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d outputs missing", q.size()); end
    $display("mechanisms: gaps=%0d frame_restarts=%0d first_rows=%0d p1=%0d p2=%0d estimates=%0d",
             gaps, restarts, first_rows, cnt_p1, cnt_p2, cnt_est);
    $display("planted disparity recovered at %0d of %0d interior pixels", planted_ok, planted_n);
    checks++; if (gaps == 0)       begin failures++; $display("FAIL no gaps"); end
    checks++; if (restarts == 0)   begin failures++; $display("FAIL no frame restart"); end
    checks++; if (first_rows == 0) begin failures++; $display("FAIL no first row"); end
    checks++; if (cnt_p1 == 0)     begin failures++; $display("FAIL no P1 transition"); end
    checks++; if (cnt_p2 == 0)     begin failures++; $display("FAIL no P2 transition"); end
    checks++; if (cnt_est == 0)    begin failures++; $display("FAIL no 0-degree estimate"); end
    checks++;
    if (planted_n == 0 || planted_ok * 10 < planted_n * 8) begin
      failures++; $display("FAIL planted disparity recovered too rarely");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
