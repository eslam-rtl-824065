// result_cache: the Result Cache of the BRIEF Matcher.
//
// One entry per current-frame descriptor: the index of the best-matching map
// point and its Hamming distance, kept until the matcher writes them to
// SDRAM. Single write port, single read port with one cycle of latency.
//
// Word format {distance[18:10], index[9:0]} (W = 19 bits by default) and the
// one-cycle read latency are this design's choices; the paper only says the
// Comparator's results are stored here and sent back to SDRAM.
module result_cache #(
  parameter int unsigned NA = 1024,
  parameter int unsigned W  = 19
) (
  input  logic                  clk,
  input  logic                  we,
  input  logic [$clog2(NA)-1:0] waddr,
  input  logic [W-1:0]          wdata,
  input  logic [$clog2(NA)-1:0] raddr,
  output logic [W-1:0]          rdata
);
  logic [W-1:0] mem [NA];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
