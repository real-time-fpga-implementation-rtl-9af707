// tb_sgm_cntx_gen: streams two 16x7 frames of random pixels (with random
// gaps in in_valid and line blanking) through the context generator and
// compares every 5x5 context with the window read directly from the
// stored frame: lines y-4..y, columns x-4..x, zero outside the frame.
// Also checks the two-cycle latency and the frame-start flag.
module tb_sgm_cntx_gen;
  import sgm_pkg::*;
  localparam int W = 16, H = 7, NW = W / PPC, LAT = 2, FRAMES = 2;
  int checks = 0, failures = 0, gaps = 0;
  longint cyc = 0;

  logic clk = 0, rst_n = 0, in_valid = 0, in_sof = 0, out_valid, out_sof;
  pixel_t   [PPC-1:0] in_pix;
  context_t [PPC-1:0] out_ctx;

  sgm_cntx_gen #(.WIDTH(W), .HEIGHT(H)) dut (
    .clk, .rst_n, .in_valid, .in_sof, .in_pix, .out_valid, .out_sof, .out_ctx);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  typedef struct { context_t [PPC-1:0] ctx; logic sof; longint t; } exp_t;
  exp_t q[$];
  byte unsigned img[H][W];

  function automatic pixel_t pix(int y, int x);
    return (y < 0 || x < 0) ? 8'd0 : img[y][x];
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor, sampled mid-cycle
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin failures++; $display("FAIL unexpected output"); end
      else begin
        e = q.pop_front();
        if (out_ctx !== e.ctx) begin
          failures++;
          if (failures < 5) $display("FAIL context mismatch at cycle %0d", cyc);
        end
        checks++;
        if (out_sof !== e.sof || cyc - e.t != LAT) begin
          failures++;
          $display("FAIL sof/latency: sof %0d/%0d latency %0d", out_sof, e.sof, cyc - e.t);
        end
      end
    end
  end

  initial begin
    in_pix = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < FRAMES; f++) begin
      foreach (img[y, x]) img[y][x] = 8'($urandom);
      for (int y = 0; y < H; y++) begin
        for (int k = 0; k < NW; k++) begin
          exp_t e;
          @(negedge clk);
          while ($urandom % 4 == 0) begin
            in_valid = 0; in_sof = 0; gaps++;
            @(negedge clk);
          end
          in_valid = 1;
          in_sof = (y == 0 && k == 0);
          for (int j = 0; j < PPC; j++) in_pix[j] = img[y][4*k + j];
          for (int j = 0; j < PPC; j++)
            for (int r = 0; r < WIN; r++)
              for (int c = 0; c < WIN; c++)
                e.ctx[j][r][c] = pix(y - 4 + r, 4*k + j - 4 + c);
          e.sof = in_sof;
          e.t = cyc;
          q.push_back(e);
        end
        @(negedge clk); in_valid = 0; in_sof = 0;
        repeat (3) @(negedge clk);
      end
    end
    repeat (10) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d outputs missing", q.size()); end
    checks++;
    if (gaps == 0) begin failures++; $display("FAIL no gaps exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
