// tb_score_cache: writes rows of known scores and checks that the window
// always shows the three most recent complete rows, oldest first, and that
// a freshly opened row starts cleared.
// One row is written per row_next; the window is checked after each row.
// The ping-pong style rotation follows the paper's description of the
// caches; the 4 x 10 size is this design's. Watchdog: 3,000 cycles.
module tb_score_cache;
  import eslam_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, wr_en = 0, row_next = 0;
  logic [3:0] wr_col = 0;
  logic [SCORE_W-1:0] wr_score = 0;
  logic [2:0][9:0][SCORE_W-1:0] win;
  int checks = 0, failures = 0;
  score_cache dut (.*);
  function automatic logic [SCORE_W-1:0] val(int row, int col);
    return SCORE_W'(row * 100 + col + 1);
  endfunction
  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int row = 0; row < 12; row++) begin
      for (int c = 0; c < 10; c++) begin
        // leave column 5 unwritten on every third row: it must read as 0
        wr_en <= !(row % 3 == 1 && c == 5); wr_col <= 4'(c); wr_score <= val(row, c);
        @(posedge clk);
      end
      wr_en <= 0; row_next <= 1; @(posedge clk); row_next <= 0;
      @(negedge clk);
      if (row >= 2)
        for (int k = 0; k < 3; k++) for (int c = 0; c < 10; c++) begin
          logic [SCORE_W-1:0] e;
          int rr;
          rr = row - 2 + k;
          e = (rr % 3 == 1 && c == 5) ? '0 : val(rr, c);
          checks++;
          if (win[k][c] !== e) begin
            failures++;
            $display("row %0d k %0d c %0d: %0d vs %0d", row, k, c, win[k][c], e);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
