// score_cache: the Score Cache of the ORB Extractor.
//
// Holds the Harris scores (0 = no keypoint) of NCOL columns for NROW rows of
// the current column strip as rotating row buffers: one row is written while
// the NROW-1 older rows are read by the NMS, in the paper's ping-pong manner.
// wr_en/wr_col/wr_score write into the current row; row_next (one cycle
// pulse) makes the current row the newest complete row and clears the row
// that becomes current. `win[k]` is the k-th of the three most recent
// complete rows, oldest first, available combinationally. The sizes are this
// design's choice: 10 columns are the 8 columns of a strip plus one
// neighbour on each side.
module score_cache
  import eslam_pkg::*;
#(
  parameter int unsigned NCOL = 10,
  parameter int unsigned NROW = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clear,
  input  logic                      wr_en,
  input  logic [$clog2(NCOL)-1:0]   wr_col,
  input  logic [SCORE_W-1:0]        wr_score,
  input  logic                      row_next,
  output logic [2:0][NCOL-1:0][SCORE_W-1:0] win
);
  logic [NROW-1:0][NCOL-1:0][SCORE_W-1:0] mem;
  logic [$clog2(NROW)-1:0] wp;

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      mem <= '0;
      wp <= '0;
    end else begin
      if (wr_en) mem[wp][wr_col] <= wr_score;
      if (row_next) begin
        wp <= ($clog2(NROW))'((int'(wp) + 1) % NROW);
        mem[(int'(wp) + 1) % NROW] <= '0;
      end
    end
  end

  always_comb begin
    for (int k = 0; k < 3; k++)
      win[k] = mem[(int'(wp) + NROW - 3 + k) % NROW];
  end
endmodule
