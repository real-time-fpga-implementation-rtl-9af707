// tb_sgm_top_full: one complete 3840x2160 frame through sgm_top at its
// default size (64 disparities, lambda = 4), four pixels per clock with a
// few blanking cycles after each line.
//
// The base image is a pseudo-random texture computed from the pixel
// coordinates; the reference image is the base moved left by a planted
// disparity of 23 in the upper half of the frame and 41 in the lower
// half. The first CHECK_ROWS lines are compared word by word
// with the reference model; for the whole frame the test checks that
// every word comes out once, 8 cycles after it went in, with the frame
// start flag on the first word, and that the planted disparity is found
// at more than 95 % of the positions whose windows lie inside the frame
// and inside one half (four lines at the change are left out).
module tb_sgm_top_full;
  import sgm_pkg::*;
  import tb_sgm_model_pkg::*;
  localparam int W = DEF_WIDTH, H = DEF_HEIGHT, D = DEF_DISP, LG = 2;
  localparam int NW = W / PPC, LAT = 8, CHECK_ROWS = 12;
  localparam int DW = $clog2(D);
  int checks = 0, failures = 0, planted_ok = 0, planted_n = 0, outputs = 0;
  longint cyc = 0;

  logic clk = 0, rst_n = 0, in_valid = 0, in_sof = 0, out_valid, out_sof;
  pixel_t [PPC-1:0] in_base, in_ref;
  logic [PPC-1:0][DW-1:0] out_disp;
  lcost_t p1, p2;

  sgm_top dut (
    .clk, .rst_n, .in_valid, .in_sof, .in_base, .in_ref, .p1, .p2,
    .out_valid, .out_sof, .out_disp);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  typedef struct { int d[PPC]; bit has_d; int x; int y; logic sof; longint t; } exp_t;
  exp_t q[$];
  sgm_model mdl;

  function automatic int pd(int y);   // planted disparity of line y
    return (y < H / 2) ? 23 : 41;
  endfunction

  function automatic pixel_t tex(int x, int y);
    int unsigned h;
    h = (x * 32'h9E3779B1) ^ (y * 32'h85EBCA77);
    h = h ^ (h >> 15);
    h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 12);
    return pixel_t'(h);
  endfunction

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      outputs++;
      if (q.size() == 0) begin checks++; failures++; $display("FAIL unexpected output"); end
      else begin
        e = q.pop_front();
        if (e.has_d)
          for (int j = 0; j < PPC; j++) begin
            checks++;
            if (int'(out_disp[j]) != e.d[j]) begin
              failures++;
              if (failures < 8) $display("FAIL (%0d,%0d) got %0d expected %0d", e.x + j, e.y, out_disp[j], e.d[j]);
            end
          end
        for (int j = 0; j < PPC; j++)
          if (e.y >= 4 && !(e.y >= H/2 && e.y < H/2 + 4) && e.x + j - pd(e.y) >= 4) begin
            planted_n++;
            if (int'(out_disp[j]) == pd(e.y)) planted_ok++;
          end
        if (out_sof !== e.sof || cyc - e.t != LAT) begin
          checks++; failures++;
          if (failures < 8) $display("FAIL sof/latency %0d", cyc - e.t);
        end
      end
    end
  end

  initial begin
    in_base = '0; in_ref = '0;
    p1 = 8'd6; p2 = 8'd30;
    mdl = new(W, CHECK_ROWS, D, LG, int'(p1), int'(p2));
    for (int y = 0; y < CHECK_ROWS; y++)
      for (int x = 0; x < W; x++) begin
        mdl.b[y][x] = tex(x, y);
        mdl.m[y][x] = tex(x + pd(y), y);
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int y = 0; y < H; y++) begin
      if (y < CHECK_ROWS) begin
        mdl.row_costs(y);
        mdl.row_paths(y);
        mdl.row_select();
      end
      for (int k = 0; k < NW; k++) begin
        exp_t e;
        @(negedge clk);
        in_valid = 1;
        in_sof = (y == 0 && k == 0);
        for (int j = 0; j < PPC; j++) begin
          in_base[j] = tex(4*k + j, y);
          in_ref[j]  = tex(4*k + j + pd(y), y);
          if (y < CHECK_ROWS) e.d[j] = mdl.disp[4*k+j];
        end
        e.has_d = (y < CHECK_ROWS);
        e.x = 4*k; e.y = y;
        e.sof = in_sof; e.t = cyc;
        q.push_back(e);
      end
      @(negedge clk); in_valid = 0; in_sof = 0;
      repeat (3) @(negedge clk);
      if (y % 270 == 269) $display("line %0d done", y + 1);
    end
    repeat (20) @(posedge clk);
    checks++;
    if (outputs != NW * H || q.size() != 0) begin
      failures++; $display("FAIL %0d words out, %0d expected", outputs, NW * H);
    end
    $display("planted disparity recovered at %0d of %0d interior pixels", planted_ok, planted_n);
    checks++;
    if (planted_n == 0 || planted_ok * 100 < planted_n * 95) begin
      failures++; $display("FAIL planted disparity recovered too rarely");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
