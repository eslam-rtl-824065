// fast_detection: FAST keypoint test and Harris corner score on a 7x7 patch.
//
// The centre pixel is compared with the 16 pixels of the radius-3 Bresenham
// circle. It is a keypoint when at least ARC contiguous circle pixels are all
// brighter than centre+FAST_TH or all darker than centre-FAST_TH (FAST-9 by
// default). For a keypoint the Harris response
//   R = Sxx*Syy - Sxy^2 - (Sxx+Syy)^2/16
// is formed from central-difference gradients at the 25 inner pixels of the
// patch and returned as `score`, saturated to SCORE_W bits and at least 1 so
// that 0 always means "no keypoint". The paper names the two tests and the
// 7x7 input; threshold, arc length, gradient and Harris constant k = 1/16 are
// this design's choices. Purely combinational.
module fast_detection
  import eslam_pkg::*;
#(
  parameter int unsigned FAST_TH = 20,
  parameter int unsigned ARC     = 9
) (
  input  patch_t             patch,
  output logic               is_kp,
  output logic [SCORE_W-1:0] score
);
  localparam int CX[16] = '{0, 1, 2, 3, 3, 3, 2, 1, 0, -1, -2, -3, -3, -3, -2, -1};
  localparam int CY[16] = '{-3, -3, -2, -1, 0, 1, 2, 3, 3, 3, 2, 1, 0, -1, -2, -3};

  logic [15:0] bright, dark;
  logic [31:0] bb, dd;
  logic        seg;
  logic [9:0]  c_hi;
  logic signed [9:0] c_lo;

  always_comb begin
    c_hi = 10'(patch[3][3]) + 10'(FAST_TH);
    c_lo = $signed(10'(patch[3][3])) - $signed(10'(FAST_TH));
    for (int i = 0; i < 16; i++) begin
      bright[i] = 10'(patch[3 + CY[i]][3 + CX[i]]) > c_hi;
      dark[i]   = $signed(10'(patch[3 + CY[i]][3 + CX[i]])) < c_lo;
    end
    bb = {bright, bright};
    dd = {dark, dark};
    seg = 1'b0;
    for (int s = 0; s < 16; s++) begin
      logic ab, ad;
      ab = 1'b1;
      ad = 1'b1;
      for (int k = 0; k < ARC; k++) begin
        ab &= bb[s + k];
        ad &= dd[s + k];
      end
      seg |= ab | ad;
    end
    is_kp = seg;
  end

  logic signed [9:0]  ix, iy;
  logic signed [23:0] sxx, syy, sxy;
  logic signed [49:0] resp;
  always_comb begin
    sxx = '0;
    syy = '0;
    sxy = '0;
    for (int r = 1; r <= 5; r++) begin
      for (int c = 1; c <= 5; c++) begin
        ix = $signed(10'(patch[r][c + 1])) - $signed(10'(patch[r][c - 1]));
        iy = $signed(10'(patch[r + 1][c])) - $signed(10'(patch[r - 1][c]));
        sxx += 24'(ix * ix);
        syy += 24'(iy * iy);
        sxy += 24'(ix * iy);
      end
    end
    resp = 50'(sxx) * 50'(syy) - 50'(sxy) * 50'(sxy) - ((50'(sxx + syy) * 50'(sxx + syy)) >>> 4);
    if (!is_kp)                            score = '0;
    else if (resp <= 0)                    score = 1;
    else if (resp > 50'(2**SCORE_W - 1))   score = '1;
    else                                   score = SCORE_W'(resp);
  end
endmodule
