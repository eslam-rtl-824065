// orientation_computing: keypoint orientation by intensity centroid.
//
// For a keypoint (kx, ky) the unit reads the smoothed pixels of the disc of
// radius R, one per cycle, row by row (dy = -R..R, |dx| <= umax(dy)), and
// accumulates m10 = sum(dx*I) and m01 = sum(dy*I). The mass centre is
// (m10, m01)/m00, so v/u = m01/m10 and the division by m00 is never needed.
// A lookup table holds the tangents of the eight bin edges of the first
// quadrant (5.625 + 11.25k degrees, Q12); comparing |m01| with tan*|m10|
// gives the nearest multiple of 11.25 degrees in that quadrant, and the signs
// of m10 and m01 place it in the full circle. The result is the paper's
// label 0..31 (label n = n*11.25 degrees, measured from +x towards +y, with
// y pointing down the image). The table-on-ratio method and the labels are
// the paper's; read order and rounding to the nearest label are this design's.
//
// Timing: pulse start with kx/ky; rd_x/rd_y present one address per cycle,
// rd_pix must return it one cycle later; done pulses with `label` valid about
// (number of disc pixels) + 4 cycles after start.
module orientation_computing
  import eslam_pkg::*;
#(
  parameter int R = 15
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [XW-1:0] kx,
  input  logic [YW-1:0] ky,
  output logic [XW-1:0] rd_x,
  output logic [YW-1:0] rd_y,
  input  logic [7:0]    rd_pix,
  output logic          done,
  output logic [4:0]    label
);
  function automatic logic [R:0][7:0] umax_tab();
    logic [R:0][7:0] t;
    for (int i = 0; i <= R; i++) t[i] = 8'(disc_umax(R, i));
    return t;
  endfunction
  localparam logic [R:0][7:0] UMAX = umax_tab();

  typedef enum logic [1:0] {IDLE, RUN, FLUSH, FIN} st_t;
  st_t st;
  logic signed [7:0] dx, dy, pdx, pdy;
  logic              pv;
  logic [XW-1:0]     cx;
  logic [YW-1:0]     cy;
  logic signed [31:0] m10, m01;
  logic [7:0] um;

  always_comb begin
    um = UMAX[(dy < 0) ? -dy : dy];
    rd_x = XW'($signed({1'b0, cx}) + 11'(dx));
    rd_y = YW'($signed({1'b0, cy}) + 10'(dy));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= IDLE; pv <= 1'b0; done <= 1'b0;
      m10 <= '0; m01 <= '0; dx <= '0; dy <= '0; pdx <= '0; pdy <= '0;
      cx <= '0; cy <= '0;
    end else begin
      done <= 1'b0;
      pv <= 1'b0;
      if (pv) begin
        m10 <= m10 + 32'(pdx) * $signed({24'd0, rd_pix});
        m01 <= m01 + 32'(pdy) * $signed({24'd0, rd_pix});
      end
      unique case (st)
        IDLE: if (start) begin
          cx <= kx; cy <= ky;
          m10 <= '0; m01 <= '0;
          dy <= 8'(-R);
          dx <= -$signed({1'b0, UMAX[R][6:0]});
          st <= RUN;
        end
        RUN: begin
          pv <= 1'b1; pdx <= dx; pdy <= dy;
          if (dx == $signed(um)) begin
            if (dy == 8'(R)) st <= FLUSH;
            else begin
              dy <= dy + 1;
              dx <= -$signed(UMAX[((dy + 1) < 0) ? -(dy + 1) : (dy + 1)]);
            end
          end else dx <= dx + 1;
        end
        FLUSH: st <= FIN;   // last pixel accumulates in this cycle
        FIN: begin
          done <= 1'b1;
          st <= IDLE;
        end
        default: st <= IDLE;
      endcase
    end
  end

  // Lookup-table orientation from v/u and the signs of u and v.
  logic [47:0] ax, ay;
  logic [3:0]  q;
  always_comb begin
    ax = 48'((m10 < 0) ? -m10 : m10);
    ay = 48'((m01 < 0) ? -m01 : m01);
    q = '0;
    for (int k = 0; k < 8; k++)
      if ((ay << 12) > ax * 48'(tan_edge_q12(k))) q = 4'(k + 1);
    if (m10 >= 0 && m01 >= 0)     label = 5'(q);
    else if (m10 < 0 && m01 >= 0) label = 5'(16 - int'(q));
    else if (m10 < 0)             label = 5'(16 + int'(q));
    else                          label = 5'(32 - int'(q));
  end
endmodule
