// tb_fast_detection: random and constructed patches (corners, flat, edges);
// compares keypoint flag and Harris score with a reference written
// independently (run-length over the circle, direct gradient sums).
// Combinational block: each patch is checked after #1. FAST detection and
// the Harris score are named by the paper; FAST-9, threshold 20 and the
// Harris constant 1/16 are this design's, and the reference follows them.
module tb_fast_detection;
  import eslam_pkg::*;
  patch_t patch;
  logic is_kp;
  logic [SCORE_W-1:0] score;
  int checks = 0, failures = 0, nkp = 0;
  fast_detection dut (.patch, .is_kp, .score);

  // circle in clockwise order from the top
  int cx[16] = '{0, 1, 2, 3, 3, 3, 2, 1, 0, -1, -2, -3, -3, -3, -2, -1};
  int cy[16] = '{-3, -3, -2, -1, 0, 1, 2, 3, 3, 3, 2, 1, 0, -1, -2, -3};

  function automatic int ref_kp(patch_t p);
    int c, best, run, v;
    c = p[3][3];
    for (int sgn = 0; sgn < 2; sgn++) begin
      best = 0; run = 0;
      for (int i = 0; i < 32; i++) begin
        v = p[3 + cy[i % 16]][3 + cx[i % 16]];
        if ((sgn == 0 && v > c + 20) || (sgn == 1 && v < c - 20)) begin
          run++;
          if (run > best) best = run;
        end else run = 0;
      end
      if (best >= 9) return 1;
    end
    return 0;
  endfunction

  function automatic longint ref_score(patch_t p);
    longint a = 0, b = 0, cc = 0, r;
    int gx, gy;
    for (int y = 1; y < 6; y++) for (int x = 1; x < 6; x++) begin
      gx = int'(p[y][x + 1]) - int'(p[y][x - 1]);
      gy = int'(p[y + 1][x]) - int'(p[y - 1][x]);
      a += gx * gx; b += gy * gy; cc += gx * gy;
    end
    r = a * b - cc * cc - ((a + b) * (a + b)) / 16;
    if ((a + b) * (a + b) % 16 != 0 && (a + b) * (a + b) < 0) r = r; // floor = trunc for non-negative
    if (r < 1) r = 1;
    if (r > 64'hFFFF_FFFF) r = 64'hFFFF_FFFF;
    return r;
  endfunction

  task automatic check();
    int k;
    longint s;
    #1;
    k = ref_kp(patch);
    s = (k != 0) ? ref_score(patch) : 0;
    checks++;
    if (int'(is_kp) != k || longint'(score) != s) begin
      failures++;
      $display("mismatch: kp %0d/%0d score %0d/%0d", is_kp, k, score, s);
    end
    nkp += k;
  endtask

  // Watchdog: gives up after a fixed simulated time.
  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int base, mode;
      base = $urandom_range(40, 200);
      mode = t % 4;
      for (int y = 0; y < 7; y++) for (int x = 0; x < 7; x++) begin
        case (mode)
          0: patch[y][x] = 8'($urandom);
          1: patch[y][x] = 8'(base + $urandom_range(0, 6));                  // flat
          2: patch[y][x] = 8'((x >= 3 && y >= 3 && !(x == 3 && y == 3)) ? base + 50 : base); // corner
          default: patch[y][x] = 8'(((x - 3) * (x - 3) + (y - 3) * (y - 3) >= 8) ? base - 35 : base + $urandom_range(0, 9)); // blob
        endcase
      end
      check();
    end
    checks++;
    if (nkp < 100) failures++;
    $display("keypoints seen: %0d", nkp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
