// tb_image_smoother: random patches; reference computes the 7x7 binomial blur
// as two 1-D passes in exact integer arithmetic.
// Combinational block: each patch is checked after #1, including all-0 and
// all-255 patches. The paper asks for a Gaussian blur; the binomial kernel
// and rounding are this design's, and the reference follows them.
module tb_image_smoother;
  import eslam_pkg::*;
  patch_t patch;
  logic [7:0] pix;
  int checks = 0, failures = 0;
  int k[7] = '{1, 6, 15, 20, 15, 6, 1};
  image_smoother dut (.patch, .pix);
  // Watchdog: gives up after a fixed simulated time.
  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int rows[7];
      int tot, e;
      for (int y = 0; y < 7; y++) for (int x = 0; x < 7; x++)
        patch[y][x] = (t < 2) ? 8'(t * 255) : 8'($urandom);
      tot = 0;
      for (int y = 0; y < 7; y++) begin
        rows[y] = 0;
        for (int x = 0; x < 7; x++) rows[y] += k[x] * patch[y][x];
        tot += k[y] * rows[y];
      end
      e = (tot + 2048) / 4096;
      #1;
      checks++;
      if (int'(pix) != e) begin
        failures++;
        $display("got %0d expected %0d", pix, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
