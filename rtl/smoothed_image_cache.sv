// smoothed_image_cache: the Smoothened Image Cache of the ORB Extractor.
//
// Keeps the smoothed pixels of the last SLOTS column strips of the current
// layer so that the disc of radius R around a keypoint can be read. Strip k
// holds layer columns 8k+4 .. 8k+11 (the columns the streaming front end
// smooths while strips k and k+1 sit in the Image Cache) for every row, and
// lives in slot k mod SLOTS; a new strip overwrites the oldest one, the same
// rotation the Image Cache uses. A keypoint's disc touches 2*ceil(R/8)+1 = 5
// strips; one slot more (SLOTS = 6) lets the strip being written coexist
// with the five strips a keypoint being described reads. One write port (one
// pixel per cycle) and two read ports, A for Orientation Computing and B for
// BRIEF Computing, each with one cycle of latency. Addresses are layer
// coordinates (x >= 4). The paper names the cache and its ping-pong use;
// sizes and organisation are this design's choice.
module smoothed_image_cache
  import eslam_pkg::*;
#(
  parameter int unsigned H_MAX = 480,
  parameter int unsigned SLOTS = 6
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [XW-1:0] wr_x,
  input  logic [YW-1:0] wr_y,
  input  logic [7:0]    wr_pix,
  input  logic [XW-1:0] ra_x,
  input  logic [YW-1:0] ra_y,
  output logic [7:0]    ra_pix,
  input  logic [XW-1:0] rb_x,
  input  logic [YW-1:0] rb_y,
  output logic [7:0]    rb_pix
);
  localparam int unsigned DEPTH = SLOTS * H_MAX * 8;
  localparam int unsigned AW = $clog2(DEPTH);
  logic [7:0] mem [DEPTH];

  function automatic logic [AW-1:0] addr(input logic [XW-1:0] x, input logic [YW-1:0] y);
    logic [XW-1:0] xr;
    int unsigned k;
    xr = x - XW'(4);
    k = int'(xr >> 3) % SLOTS;
    return AW'((k * H_MAX + int'(y)) * 8 + int'(xr[2:0]));
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en) mem[addr(wr_x, wr_y)] <= wr_pix;
    ra_pix <= mem[addr(ra_x, ra_y)];
    rb_pix <= mem[addr(rb_x, rb_y)];
  end
endmodule
