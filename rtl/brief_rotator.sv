// brief_rotator: turns an RS-BRIEF descriptor to the keypoint orientation.
//
// Because the test pattern is 32-fold rotationally symmetric, rotating the
// pattern by n steps of 11.25 degrees equals moving the first 8*n descriptor
// bits (bits 0 .. 8n-1) to the end: desc_out[i] = desc_in[(i + 8n) mod 256].
// This is the paper's rotator; taking bit 0 as the beginning is this design's
// convention. Purely combinational (a 32-way byte rotation).
module brief_rotator
  import eslam_pkg::*;
(
  input  logic [NBITS-1:0] desc_in,
  input  logic [4:0]       label,
  output logic [NBITS-1:0] desc_out
);
  logic [2*NBITS-1:0] dbl;
  always_comb begin
    dbl = {desc_in, desc_in};
    desc_out = dbl[{label, 3'b000} +: NBITS];
  end
endmodule
