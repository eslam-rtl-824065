// tb_distance_computing: random and extreme descriptor pairs; reference counts
// differing bits one by one.
// Combinational block: each case is checked after #1. Extreme cases are
// equal descriptors (distance 0) and complements (256). Popcount of XOR is
// the paper's Hamming distance; four lanes is this design's choice.
module tb_distance_computing;
  import eslam_pkg::*;
  localparam int L = 4;
  logic [NBITS-1:0] a;
  logic [L-1:0][NBITS-1:0] b;
  logic [L-1:0][8:0] hdist;
  int checks = 0, failures = 0;
  distance_computing #(.LANES(L)) dut (.*);
  // Watchdog: gives up after a fixed simulated time.
  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      for (int k = 0; k < 8; k++) a[32 * k +: 32] = $urandom;
      for (int l = 0; l < L; l++) begin
        for (int k = 0; k < 8; k++) b[l][32 * k +: 32] = $urandom;
        if (t % 5 == l) b[l] = a;
        if (t % 7 == l) b[l] = ~a;
      end
      #1;
      for (int l = 0; l < L; l++) begin
        int e;
        e = 0;
        for (int i = 0; i < NBITS; i++) if (a[i] != b[l][i]) e++;
        checks++;
        if (int'(hdist[l]) != e) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
