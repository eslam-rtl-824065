// eslam_pkg: types, constants and constant functions shared by the eSLAM
// feature-extraction and matching accelerator.
//
// Holds the AXI request/response bundles (single-beat, 64-bit), the feature
// record kept in the heap, and the RS-BRIEF test pattern. The pattern is the
// paper's construction: 8 seed test pairs, each rotated by k*11.25 degrees for
// k = 0..31, giving 256 tests whose rotation by one step is a shift of the
// descriptor by 8 bits. The seed coordinates themselves are this design's own
// choice (the paper does not print them); rotations use Q14 cosines and are
// rounded to the nearest pixel.
package eslam_pkg;

  localparam int unsigned DATA_W = 64;   // AXI data width, 8 pixels per beat
  localparam int unsigned ADDR_W = 32;
  localparam int unsigned NBITS  = 256;  // descriptor length
  localparam int unsigned SCORE_W = 32;
  localparam int unsigned XW = 10;       // column coordinate width (640)
  localparam int unsigned YW = 9;        // row coordinate width (480)

  // 7x7 pixel patch, patch[row][col], row 0 at the top.
  typedef logic [6:0][6:0][7:0] patch_t;

  typedef struct packed {
    logic [ADDR_W-1:0] araddr;
    logic              arvalid;
    logic              rready;
    logic [ADDR_W-1:0] awaddr;
    logic              awvalid;
    logic [DATA_W-1:0] wdata;
    logic [DATA_W/8-1:0] wstrb;
    logic              wvalid;
    logic              bready;
  } axi_req_t;

  typedef struct packed {
    logic              arready;
    logic              rvalid;
    logic [DATA_W-1:0] rdata;
    logic              awready;
    logic              wready;
    logic              bvalid;
  } axi_rsp_t;

  typedef struct packed {
    logic [SCORE_W-1:0] score;
    logic [1:0]         layer;
    logic [YW-1:0]      y;
    logic [XW-1:0]      x;
    logic [NBITS-1:0]   desc;
  } feature_t;

  // Q14 cos(k*11.25 deg), k = 0..8.
  function automatic int cos_q14(input int k);
    int t[9] = '{16384, 16069, 15137, 13623, 11585, 9102, 6270, 3196, 0};
    int m;
    m = ((k % 32) + 32) % 32;
    if (m <= 8)       return  t[m];
    else if (m <= 16) return -t[16 - m];
    else if (m <= 24) return -t[m - 16];
    else              return  t[32 - m];
  endfunction

  function automatic int sin_q14(input int k);
    return cos_q14(k - 8);
  endfunction

  // Round a Q14 value to the nearest integer (halves away from zero).
  function automatic int rnd_q14(input int v);
    if (v >= 0) return (v + 8192) >>> 14;
    else        return -((-v + 8192) >>> 14);
  endfunction

  // Seed pairs (S_x, S_y, D_x, D_y), all within radius 13.
  function automatic int seed_coord(input int s, input int c);
    int t[8][4] = '{
      '{  3,  -2,  -5,   7},
      '{ -8,   4,   6,  -3},
      '{  1,  11,  -2,  -9},
      '{ 10,   5,   4,  -1},
      '{ -4,  -6,  -1,   2},
      '{  7,  -9, -10,   0},
      '{ -2,   1,   0,  12},
      '{ 12,  -3,   2,   6}};
    return t[s][c];
  endfunction

  // Coordinate c (0:Sx 1:Sy 2:Dx 3:Dy) of test i = 8*g + s: seed s rotated by
  // g*11.25 degrees: x' = x cos - y sin, y' = y cos + x sin.
  function automatic int pattern_coord(input int i, input int c);
    int g, s, x, y;
    g = i / 8;
    s = i % 8;
    x = seed_coord(s, (c < 2) ? 0 : 2);
    y = seed_coord(s, (c < 2) ? 1 : 3);
    if (c % 2 == 0) return rnd_q14(x * cos_q14(g) - y * sin_q14(g));
    else            return rnd_q14(y * cos_q14(g) + x * sin_q14(g));
  endfunction

  // Half-width of the disc of radius r at row offset dy: largest u with
  // u^2 + dy^2 <= r^2.
  function automatic int disc_umax(input int r, input int dy);
    int u;
    u = 0;
    while ((u + 1) * (u + 1) + dy * dy <= r * r) u++;
    return u;
  endfunction

  // Q12 tangents of the orientation bin edges 5.625 + 11.25*k degrees, k=0..7.
  function automatic int tan_edge_q12(input int k);
    int t[8] = '{403, 1243, 2189, 3362, 4991, 7663, 13503, 41587};
    return t[k];
  endfunction

endpackage
