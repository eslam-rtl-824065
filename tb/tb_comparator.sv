// tb_comparator: random searches of several rows with masked lanes and many
// equal distances; reference keeps the first minimum in index order.
// Each search starts with `first` and feeds rows of LANES distances with
// `en`; the result is read one cycle after the last row. The paper asks for
// the minimum; the lower-index tie rule is this design's and is checked
// here. Watchdog: a fixed cycle limit.
module tb_comparator;
  localparam int L = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en = 0, first = 0;
  logic [L-1:0][8:0] hdist = 0;
  logic [L-1:0] valid_mask = 0;
  logic [9:0] base_idx = 0, best_idx;
  logic [8:0] best_dist;
  int checks = 0, failures = 0;
  comparator #(.LANES(L), .IDX_W(10)) dut (.*);
  // Watchdog: gives up after a fixed number of cycles.
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < 300; t++) begin
      int rows, bd, bi;
      rows = $urandom_range(1, 6);
      bd = 1000; bi = 0;
      for (int r = 0; r < rows; r++) begin
        logic [L-1:0][8:0] d;
        logic [L-1:0] m;
        for (int l = 0; l < L; l++) begin
          d[l] = 9'($urandom_range(0, 12));
          m[l] = (r < rows - 1) || ($urandom_range(0, 3) != 0) || l == 0;
          if (m[l] && int'(d[l]) < bd) begin bd = d[l]; bi = r * L + l; end
        end
        en <= 1; first <= (r == 0); hdist <= d; valid_mask <= m; base_idx <= 10'(r * L);
        @(posedge clk);
      end
      en <= 0;
      @(negedge clk);
      checks++;
      if (int'(best_dist) != bd || int'(best_idx) != bi) begin
        failures++;
        $display("got %0d@%0d expected %0d@%0d", best_dist, best_idx, bd, bi);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
