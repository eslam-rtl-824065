// orb_ref.svh: software reference of one layer of ORB extraction, shared by
// the extractor and top-level testbenches. Works on an image in
// ref_img[y][x] (size ref_w x ref_h) and fills ref_kp[$] with the expected
// features {x, y, score, desc}. Written from the algorithm description, not
// from the RTL: floating-point pattern rotation and atan2 orientation.
// Pipeline: FAST-9 with threshold 20 on the 16-pixel circle, Harris score
// with k = 1/16 on the inner 5x5 (saturated, at least 1), 3x3 NMS with the
// strict/non-strict tie rule, border rule R+4, 7x7 binomial smoothing,
// intensity-centroid orientation and the steered RS-BRIEF test. desc_alt is
// the descriptor for the neighbouring orientation label, accepted when the
// floating-point angle lies within a hair of a bin edge. The paper fixes
// the RS-BRIEF structure and the centroid orientation; the thresholds, the
// kernel and the seed pairs are this design's choices and are mirrored here.
typedef struct {
  int x;
  int y;
  longint score;
  logic [255:0] desc;
  logic [255:0] desc_alt;   // descriptor for the neighbouring label when the angle sits on a bin edge
} ref_feat_t;

int ref_w, ref_h, ref_r = 15;
int ref_img [480][640];
int ref_sm [480][640];
longint ref_sc [480][640];
ref_feat_t ref_kp [$];

int rcx[16] = '{0, 1, 2, 3, 3, 3, 2, 1, 0, -1, -2, -3, -3, -3, -2, -1};
int rcy[16] = '{-3, -3, -2, -1, 0, 1, 2, 3, 3, 3, 2, 1, 0, -1, -2, -3};
int rbin[7] = '{1, 6, 15, 20, 15, 6, 1};

function automatic int rround(real v);
  return (v >= 0) ? int'($floor(v + 0.5)) : -int'($floor(-v + 0.5));
endfunction

function automatic longint ref_fast(int x, int y);
  int c, best, run, v, iskp;
  longint a, b, cc, r;
  int gx, gy;
  c = ref_img[y][x];
  iskp = 0;
  for (int sgn = 0; sgn < 2; sgn++) begin
    best = 0; run = 0;
    for (int i = 0; i < 32; i++) begin
      v = ref_img[y + rcy[i % 16]][x + rcx[i % 16]];
      if ((sgn == 0 && v > c + 20) || (sgn == 1 && v < c - 20)) begin
        run++;
        if (run > best) best = run;
      end else run = 0;
    end
    if (best >= 9) iskp = 1;
  end
  if (iskp == 0) return 0;
  a = 0; b = 0; cc = 0;
  for (int yy = y - 2; yy <= y + 2; yy++) for (int xx = x - 2; xx <= x + 2; xx++) begin
    gx = ref_img[yy][xx + 1] - ref_img[yy][xx - 1];
    gy = ref_img[yy + 1][xx] - ref_img[yy - 1][xx];
    a += gx * gx; b += gy * gy; cc += gx * gy;
  end
  r = a * b - cc * cc - ((a + b) * (a + b)) / 16;
  if (r < 1) r = 1;
  if (r > 64'hFFFF_FFFF) r = 64'hFFFF_FFFF;
  return r;
endfunction

function automatic logic [255:0] ref_brief(int x, int y);
  logic [255:0] d;
  for (int i = 0; i < 256; i++) begin
    real a, c, s;
    int sx, sy, dx, dy;
    a = (i / 8) * 11.25 * 3.14159265358979 / 180.0;
    c = $cos(a); s = $sin(a);
    sx = rround(eslam_pkg::seed_coord(i % 8, 0) * c - eslam_pkg::seed_coord(i % 8, 1) * s);
    sy = rround(eslam_pkg::seed_coord(i % 8, 1) * c + eslam_pkg::seed_coord(i % 8, 0) * s);
    dx = rround(eslam_pkg::seed_coord(i % 8, 2) * c - eslam_pkg::seed_coord(i % 8, 3) * s);
    dy = rround(eslam_pkg::seed_coord(i % 8, 3) * c + eslam_pkg::seed_coord(i % 8, 2) * s);
    d[i] = ref_sm[y + sy][x + sx] > ref_sm[y + dy][x + dx];
  end
  return d;
endfunction

function automatic logic [255:0] ref_rot(logic [255:0] d, int n);
  logic [255:0] o;
  for (int i = 0; i < 256; i++) o[i] = d[(i + 8 * n) % 256];
  return o;
endfunction

function automatic void ref_extract();
  ref_kp.delete();
  for (int y = 0; y < ref_h; y++) for (int x = 0; x < ref_w; x++) begin
    ref_sc[y][x] = 0;
    ref_sm[y][x] = 0;
  end
  for (int y = 3; y <= ref_h - 4; y++) for (int x = 3; x <= ref_w - 4; x++) begin
    int t;
    t = 0;
    for (int yy = 0; yy < 7; yy++) for (int xx = 0; xx < 7; xx++)
      t += rbin[yy] * rbin[xx] * ref_img[y - 3 + yy][x - 3 + xx];
    ref_sm[y][x] = (t + 2048) / 4096;
    ref_sc[y][x] = ref_fast(x, y);
  end
  for (int y = ref_r + 4; y <= ref_h - 5 - ref_r; y++)
    for (int x = ref_r + 4; x <= ref_w - 5 - ref_r; x++) begin
      int keep;
      longint s;
      s = ref_sc[y][x];
      keep = (s != 0);
      for (int dy = -1; dy <= 1; dy++) for (int dx = -1; dx <= 1; dx++) begin
        if (dy < 0 || (dy == 0 && dx < 0)) begin if (ref_sc[y + dy][x + dx] >= s) keep = 0; end
        else if (dy > 0 || dx > 0) begin if (ref_sc[y + dy][x + dx] > s) keep = 0; end
      end
      if (keep) begin
        ref_feat_t f;
        longint m10, m01;
        real ang, fr;
        int n, n2;
        logic [255:0] d;
        m10 = 0; m01 = 0;
        for (int dy = -ref_r; dy <= ref_r; dy++) for (int dx = -ref_r; dx <= ref_r; dx++)
          if (dx * dx + dy * dy <= ref_r * ref_r) begin
            m10 += dx * ref_sm[y + dy][x + dx];
            m01 += dy * ref_sm[y + dy][x + dx];
          end
        ang = $atan2($itor(m01), $itor(m10)) * 180.0 / 3.14159265358979;
        if (ang < 0) ang += 360.0;
        n = int'($floor(ang / 11.25 + 0.5)) % 32;
        fr = ang / 11.25 - $floor(ang / 11.25);
        n2 = n;
        if (fr > 0.49 && fr < 0.51) n2 = (fr < 0.5) ? (n + 1) % 32 : (n + 31) % 32;
        d = ref_brief(x, y);
        f.x = x; f.y = y; f.score = s;
        f.desc = ref_rot(d, n);
        f.desc_alt = ref_rot(d, n2);
        ref_kp.push_back(f);
      end
    end
endfunction
