// tb_nms: random 3x3 windows with many ties; the reference states the rule as
// "no earlier neighbour >= centre and no later neighbour > centre".
// Combinational block: each window is checked after #1. Keeping the 3x3
// maximum is the paper's rule; the tie rule is this design's.
module tb_nms;
  import eslam_pkg::*;
  logic [2:0][2:0][SCORE_W-1:0] win;
  logic keep;
  int checks = 0, failures = 0, kept = 0;
  nms dut (.win, .keep);
  // Watchdog: gives up after a fixed simulated time.
  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 5000; t++) begin
      int e;
      for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) win[r][c] = SCORE_W'($urandom_range(0, 5));
      e = (win[1][1] != 0);
      for (int i = 0; i < 9; i++) begin
        if (i < 4 && win[i / 3][i % 3] >= win[1][1]) e = 0;
        if (i > 4 && win[i / 3][i % 3] > win[1][1]) e = 0;
      end
      #1;
      checks++;
      kept += e;
      if (int'(keep) != e) failures++;
    end
    checks++;
    if (kept < 50) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
