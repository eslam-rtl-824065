// descriptor_cache: the Descriptor Cache of the BRIEF Matcher.
//
// Two memories. D_A holds up to NA descriptors of the current frame, written
// one at a time by the ORB Extractor and read one per cycle. D_B holds up to
// NB map-point descriptors loaded from SDRAM; it is written one descriptor at
// a time but read as rows of LANES descriptors (row r holds descriptors
// LANES*r .. LANES*r+LANES-1) so that the Distance Computing stage compares one
// D_A descriptor with LANES map points per cycle. Reads have one cycle of
// latency. The paper names the cache and its two sets; the capacities of D_B
// and the lane organisation are this design's choices.
module descriptor_cache
  import eslam_pkg::*;
#(
  parameter int unsigned NA    = 1024,
  parameter int unsigned NB    = 1024,
  parameter int unsigned LANES = 4
) (
  input  logic                            clk,
  input  logic                            a_we,
  input  logic [$clog2(NA)-1:0]           a_waddr,
  input  logic [NBITS-1:0]                a_wdata,
  input  logic [$clog2(NA)-1:0]           a_raddr,
  output logic [NBITS-1:0]                a_rdata,
  input  logic                            b_we,
  input  logic [$clog2(NB)-1:0]           b_waddr,
  input  logic [NBITS-1:0]                b_wdata,
  input  logic [$clog2(NB/LANES)-1:0]     b_raddr,
  output logic [LANES-1:0][NBITS-1:0]     b_rdata
);
  localparam int unsigned LW = $clog2(LANES);
  logic [NBITS-1:0] mem_a [NA];
  logic [LANES-1:0][NBITS-1:0] mem_b [NB / LANES];

  always_ff @(posedge clk) begin
    if (a_we) mem_a[a_waddr] <= a_wdata;
    a_rdata <= mem_a[a_raddr];
  end

  always_ff @(posedge clk) begin
    if (b_we) mem_b[b_waddr[$clog2(NB)-1:LW]][b_waddr[LW-1:0]] <= b_wdata;
    b_rdata <= mem_b[b_raddr];
  end
endmodule
