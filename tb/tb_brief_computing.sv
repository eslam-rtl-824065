// tb_brief_computing: random smoothed images served by a one-cycle-latency
// memory; the reference builds the RS-BRIEF pattern itself from the seed
// pairs with floating-point rotation and rounding, and checks the descriptor
// and the 515-cycle latency. It also checks that rotating the image by 90
// degrees about the keypoint rotates the descriptor by 8 groups (64 bits).
// Interface: start/kx/ky in, rd_x/rd_y out, rd_pix back after one cycle.
// Watchdog: 100,000 cycles. The 32-fold symmetric pattern is the paper's;
// the seed pairs and the 2-reads-per-test timing are this design's.
module tb_brief_computing;
  import eslam_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, done;
  logic [XW-1:0] kx = 0, rd_x;
  logic [YW-1:0] ky = 0, rd_y;
  logic [7:0] rd_pix;
  logic [NBITS-1:0] desc, d0;
  int checks = 0, failures = 0, rot90 = 0;
  logic [7:0] im [64][64];
  brief_computing dut (.*);
  always_ff @(posedge clk) rd_pix <= im[rd_y[5:0]][rd_x[5:0]];

  function automatic int rr(real v);
    return (v >= 0) ? int'($floor(v + 0.5)) : -int'($floor(-v + 0.5));
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < 12; t++) begin
      logic [NBITS-1:0] e;
      int cyc;
      for (int y = 0; y < 64; y++) for (int x = 0; x < 64; x++) im[y][x] = 8'($urandom);
      if (t % 2 == 1)  // rotated copy of the previous image about (32,32): new(x,y) = old(y', ...)
        for (int y = 0; y < 64; y++) for (int x = 0; x < 64; x++) im[y][x] = 8'(x * 3 + y * 5);
      for (int i = 0; i < NBITS; i++) begin
        real a, c, s;
        int sx, sy, dx, dy;
        a = (i / 8) * 11.25 * 3.14159265358979 / 180.0;
        c = $cos(a); s = $sin(a);
        sx = rr(seed_coord(i % 8, 0) * c - seed_coord(i % 8, 1) * s);
        sy = rr(seed_coord(i % 8, 1) * c + seed_coord(i % 8, 0) * s);
        dx = rr(seed_coord(i % 8, 2) * c - seed_coord(i % 8, 3) * s);
        dy = rr(seed_coord(i % 8, 3) * c + seed_coord(i % 8, 2) * s);
        e[i] = im[32 + sy][32 + sx] > im[32 + dy][32 + dx];
      end
      kx <= 32; ky <= 32; start <= 1;
      @(posedge clk); start <= 0;
      cyc = 1;
      while (!done) begin @(posedge clk); cyc++; end
      @(negedge clk);
      checks += 2;
      if (desc !== e) begin failures++; $display("test %0d: descriptor mismatch", t); end
      if (cyc != 2 * NBITS + 3) begin failures++; $display("cycles %0d", cyc); end
    end
    // Rotation property: image rotated by +90 deg about the keypoint.
    for (int y = 0; y < 64; y++) for (int x = 0; x < 64; x++) im[y][x] = 8'($urandom);
    kx <= 32; ky <= 32; start <= 1; @(posedge clk); start <= 0;
    while (!done) @(posedge clk);
    @(negedge clk);
    d0 = desc;
    begin
      logic [7:0] old [64][64];
      old = im;
      // point p rotated by +90 deg: (x,y) -> (-y, x); new(R p) = old(p)
      for (int y = 1; y < 64; y++) for (int x = 1; x < 64; x++)
        im[32 + (x - 32)][32 - (y - 32)] = old[y][x];
    end
    kx <= 32; ky <= 32; start <= 1; @(posedge clk); start <= 0;
    while (!done) @(posedge clk);
    @(negedge clk);
    checks++;
    // descriptor of rotated image, group g = original group g - 8
    if (desc !== {d0[NBITS-65:0], d0[NBITS-1:NBITS-64]}) begin
      failures++;
      $display("rotation property violated");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
