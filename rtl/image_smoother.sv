// image_smoother: Gaussian blur of a 7x7 patch to one smoothed pixel.
//
// The kernel is the separable binomial [1 6 15 20 15 6 1]/64 along each axis
// (weights sum to 4096), rounded to nearest. The paper asks for a Gaussian
// blur of the 7x7 patch; the binomial approximation is this design's choice.
// Purely combinational.
//
// Interface: patch (7x7 pixels, [row][col]) in, pix (the smoothed value of
// the centre pixel) out. The extractor registers the output and writes it
// to the Smoothened Image Cache, one pixel per patch.
module image_smoother
  import eslam_pkg::*;
(
  input  patch_t     patch,
  output logic [7:0] pix
);
  localparam int unsigned K[7] = '{1, 6, 15, 20, 15, 6, 1};
  logic [21:0] acc;
  always_comb begin
    acc = '0;
    for (int r = 0; r < 7; r++)
      for (int c = 0; c < 7; c++)
        acc += 22'(K[r] * K[c]) * 22'(patch[r][c]);
    pix = 8'((acc + 22'd2048) >> 12);
  end
endmodule
