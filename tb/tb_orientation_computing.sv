// tb_orientation_computing: the keypoint sits in a synthetic image with an
// intensity ramp in a random direction (plus noise); a one-cycle-latency
// memory serves the pixel reads. The reference sums the moments over the disc
// itself and takes the label as round(atan2(m01, m10) / 11.25 deg) mod 32 in
// floating point. Also checks the cycle count per keypoint.
// Watchdog: 200,000 cycles. The intensity centroid and the 32 labels are the
// paper's; the Q12 edge table and the one-pixel-per-cycle timing are this
// design's.
module tb_orientation_computing;
  import eslam_pkg::*;
  localparam int R = 15;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, done;
  logic [XW-1:0] kx = 0, rd_x;
  logic [YW-1:0] ky = 0, rd_y;
  logic [7:0] rd_pix;
  logic [4:0] label;
  int checks = 0, failures = 0;
  real ang, th;
  int ramp_a, ramp_b, seedn, npix;
  orientation_computing #(.R(R)) dut (.*);

  function automatic int img(int x, int y);
    int v;
    v = 128 + (ramp_a * (x - 40) + ramp_b * (y - 40)) / 8 + ((x * 13 + y * 7 + seedn) % 5);
    return (v < 0) ? 0 : (v > 255) ? 255 : v;
  endfunction
  always_ff @(posedge clk) rd_pix <= 8'(img(int'(rd_x), int'(rd_y)));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    npix = 0;
    for (int dy = -R; dy <= R; dy++) for (int dx = -R; dx <= R; dx++) if (dx * dx + dy * dy <= R * R) npix++;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < 150; t++) begin
      longint m10, m01;
      int e, cyc;
      real d;
      th = $itor($urandom_range(0, 35999)) / 100.0;
      ramp_a = int'(40.0 * $cos(th * 3.14159265358979 / 180.0));
      ramp_b = int'(40.0 * $sin(th * 3.14159265358979 / 180.0));
      seedn = t;
      m10 = 0; m01 = 0;
      for (int dy = -R; dy <= R; dy++) for (int dx = -R; dx <= R; dx++)
        if (dx * dx + dy * dy <= R * R) begin
          m10 += dx * img(40 + dx, 40 + dy);
          m01 += dy * img(40 + dx, 40 + dy);
        end
      ang = $atan2($itor(m01), $itor(m10)) * 180.0 / 3.14159265358979;
      if (ang < 0) ang += 360.0;
      e = int'($floor(ang / 11.25 + 0.5)) % 32;
      d = ang / 11.25 - $floor(ang / 11.25);
      kx <= 40; ky <= 40; start <= 1;
      @(posedge clk); start <= 0;
      cyc = 1;
      while (!done) begin @(posedge clk); cyc++; end
      @(negedge clk);
      if (d > 0.499 && d < 0.501) continue;   // on a bin edge: either label is right
      checks++;
      if (int'(label) != e) begin
        failures++;
        $display("angle %f: label %0d expected %0d", ang, label, e);
      end
      checks++;
      if (cyc != npix + 4) begin
        failures++;
        $display("cycles %0d expected %0d", cyc, npix + 4);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
