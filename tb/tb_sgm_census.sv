// tb_sgm_census: checks the census transform against the worked example
// of a 3x3 window (base centre 4 -> 11101000, reference centre 3 ->
// 11110100) and against the reference model on random 5x5 windows,
// including windows with many equal pixels.
module tb_sgm_census;
  import tb_sgm_model_pkg::*;
  int checks = 0, failures = 0;

  logic [2:0][2:0][7:0] ctx3;
  logic [7:0]           cen3;
  logic [4:0][4:0][7:0] ctx5;
  logic [23:0]          cen5;

  sgm_census #(.WIN(3), .PW(8)) dut3 (.ctx(ctx3), .census(cen3));
  sgm_census #(.WIN(5), .PW(8)) dut5 (.ctx(ctx5), .census(cen5));

  task automatic check(string what, longint unsigned got, longint unsigned exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int win[][];
    // ctx3[row][col], row 0 on top, col 0 on the left
    ctx3[0] = {8'd6, 8'd6, 8'd6}; ctx3[1] = {8'd5, 8'd4, 8'd2}; ctx3[2] = {8'd4, 8'd3, 8'd1};
    #1 check("example base", cen3, 8'b1110_1000);
    ctx3[0] = {8'd6, 8'd7, 8'd6}; ctx3[1] = {8'd3, 8'd3, 8'd4}; ctx3[2] = {8'd2, 8'd1, 8'd5};
    #1 check("example ref", cen3, 8'b1111_0100);
    win = new[5];
    foreach (win[r]) win[r] = new[5];
    for (int t = 0; t < 2000; t++) begin
      for (int r = 0; r < 5; r++)
        for (int c = 0; c < 5; c++) begin
          win[r][c] = (t % 2) ? ($urandom % 4) : ($urandom % 256);
          ctx5[r][c] = 8'(win[r][c]);
        end
      #1 check("random 5x5", cen5, census_win(win, 5));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
