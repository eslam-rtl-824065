// nms: 3x3 non-maximum suppression on Harris scores.
//
// The centre of the 3x3 score window survives when it is a keypoint (score
// non-zero) and its score is the maximum of the window. Ties are broken by
// scan order: the centre must be strictly greater than the four neighbours
// scanned before it (the row above and the left neighbour) and at least equal
// to the four scanned after it, so of two equal neighbouring maxima exactly
// the earlier one is kept. The paper states the 3x3 maximum rule; the tie
// rule is this design's choice. Purely combinational.
module nms
  import eslam_pkg::*;
(
  input  logic [2:0][2:0][SCORE_W-1:0] win,   // win[row][col], row 0 = above
  output logic                         keep
);
  always_comb begin
    keep = (win[1][1] != '0);
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < 3; c++) begin
        if (r * 3 + c < 4)      keep &= win[1][1] >  win[r][c];
        else if (r * 3 + c > 4) keep &= win[1][1] >= win[r][c];
      end
  end
endmodule
