// distance_computing: Hamming distances of one descriptor to LANES others.
//
// hdist[l] = number of ones in a XOR b[l], for 256-bit descriptors (0..256,
// 9 bits). Purely combinational; the lane count is this design's choice.
// Interface: a (256 bits), b (LANES x 256 bits) in; hdist (LANES x 9 bits)
// out. The paper's Distance Computing block computes Hamming distances
// between a current-frame descriptor and map descriptors; evaluating four
// map descriptors at once (LANES = 4) is this design's choice, made so that
// 1024 x 1024 distances fit in the matching time the paper reports.
module distance_computing
  import eslam_pkg::*;
#(
  parameter int unsigned LANES = 4
) (
  input  logic [NBITS-1:0]            a,
  input  logic [LANES-1:0][NBITS-1:0] b,
  output logic [LANES-1:0][8:0]       hdist
);
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic [NBITS-1:0] x;
      x = a ^ b[l];
      hdist[l] = '0;
      for (int i = 0; i < NBITS; i++) hdist[l] += 9'(x[i]);
    end
  end
endmodule
