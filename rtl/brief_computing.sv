// brief_computing: RS-BRIEF descriptor of one keypoint.
//
// The 256 tests follow the rotationally symmetric pattern of eslam_pkg: test
// 8g+s compares the smoothed pixel at seed S_s rotated by g*11.25 degrees
// with the one at seed D_s rotated by the same angle, and bit 8g+s of the
// descriptor is 1 when I(S) > I(D). The descriptor is computed for the
// unrotated pattern; the BRIEF Rotator then turns it to the keypoint's
// orientation. The pattern construction is the paper's; the seed positions,
// the bit order and reading one pixel per cycle are this design's choices.
//
// Timing: pulse start with kx/ky; the unit presents S then D of each test on
// rd_x/rd_y, one address per cycle, with rd_pix one cycle later; done pulses
// with desc valid 515 cycles after start.
module brief_computing
  import eslam_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [XW-1:0]    kx,
  input  logic [YW-1:0]    ky,
  output logic [XW-1:0]    rd_x,
  output logic [YW-1:0]    rd_y,
  input  logic [7:0]       rd_pix,
  output logic             done,
  output logic [NBITS-1:0] desc
);
  function automatic logic [NBITS-1:0][3:0][5:0] pat_tab();
    logic [NBITS-1:0][3:0][5:0] t;
    for (int i = 0; i < NBITS; i++)
      for (int c = 0; c < 4; c++) t[i][c] = 6'(pattern_coord(i, c));
    return t;
  endfunction
  localparam logic [NBITS-1:0][3:0][5:0] PAT = pat_tab();

  logic              run;
  logic [9:0]        step;        // 2*test + (0: S, 1: D)
  logic              pv;
  logic [9:0]        pstep;
  logic [XW-1:0]     cx;
  logic [YW-1:0]     cy;
  logic [7:0]        s_pix;
  logic signed [5:0] ox, oy;

  always_comb begin
    ox = $signed(PAT[step[8:1]][step[0] ? 2 : 0]);
    oy = $signed(PAT[step[8:1]][step[0] ? 3 : 1]);
    rd_x = XW'($signed({1'b0, cx}) + 11'(ox));
    rd_y = YW'($signed({1'b0, cy}) + 10'(oy));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run <= 1'b0; step <= '0; pv <= 1'b0; pstep <= '0; done <= 1'b0;
      cx <= '0; cy <= '0; s_pix <= '0; desc <= '0;
    end else begin
      done <= 1'b0;
      pv <= run;
      pstep <= step;
      if (start && !run) begin
        run <= 1'b1; step <= '0; cx <= kx; cy <= ky;
      end else if (run) begin
        if (step == 10'(2 * NBITS - 1)) run <= 1'b0;
        step <= step + 1;
      end
      if (pv) begin
        if (!pstep[0]) s_pix <= rd_pix;
        else desc[pstep[8:1]] <= s_pix > rd_pix;
        if (pstep == 10'(2 * NBITS - 1)) done <= 1'b1;
      end
    end
  end
endmodule
