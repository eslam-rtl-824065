// tb_brief_rotator: random descriptors and all 32 labels against a bit-wise
// reference of "move the first 8n bits to the end".
// The block is combinational, so each case is checked after a #1 delay.
// The rule "move the first 8n bits to the end" is the paper's; bit 0 as the
// beginning is this design's convention, and the reference follows it.
// No clock: the watchdog is a fixed time limit.
module tb_brief_rotator;
  import eslam_pkg::*;
  logic [NBITS-1:0] desc_in, desc_out, e;
  logic [4:0] label;
  int checks = 0, failures = 0;
  brief_rotator dut (.*);
  // Watchdog: gives up after a fixed simulated time.
  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 640; t++) begin
      int n;
      for (int w = 0; w < 8; w++) desc_in[32 * w +: 32] = $urandom;
      n = t % 32;
      label = 5'(n);
      for (int i = 0; i < NBITS - 8 * n; i++) e[i] = desc_in[i + 8 * n];
      for (int i = 0; i < 8 * n; i++) e[NBITS - 8 * n + i] = desc_in[i];
      #1;
      checks++;
      if (desc_out !== e) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
