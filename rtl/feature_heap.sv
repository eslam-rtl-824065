// feature_heap: the Heap that filters the features of one frame.
//
// Keeps the CAP features with the highest Harris scores seen since `clear`,
// in a binary heap ordered so that the root is the weakest kept feature (a
// max-heap on the negated score). While fewer than CAP features are held, a
// new feature is inserted at the end and sifted up; once full, a feature
// stronger than the root replaces the root and is sifted down, and a weaker
// one is dropped. Sifting moves a "hole" one level per cycle: each cycle one
// entry is copied one level and the new feature is written once at the end,
// so the payload memory needs a single write port. Scores are kept in a
// separate key array read combinationally.
//
// The paper asks for a heap keeping the 1024 best features and calls it a
// max-heap; putting the weakest at the root is what that filtering needs and
// is this design's reading. The hole-moving sift is this design's choice.
//
// Interface: in_valid/in_ready handshake for in_feat (one feature accepted per
// operation, at most log2(CAP)+1 cycles). After extraction, rd_idx
// 0..count-1 reads the held features (heap order, not sorted) one cycle
// later on rd_feat. n_dropped counts features lost since `clear`: refused
// because they were weaker than every kept one, or evicted from the root
// to make room; so count + n_dropped equals the number of features offered.
module feature_heap
  import eslam_pkg::*;
#(
  parameter int unsigned CAP = 1024
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  feature_t               in_feat,
  input  logic [$clog2(CAP)-1:0] rd_idx,
  output feature_t               rd_feat,
  output logic [$clog2(CAP):0]   count,
  output logic [15:0]            n_dropped
);
  localparam int unsigned IW = $clog2(CAP);
  feature_t           data [CAP];
  logic [SCORE_W-1:0] key  [CAP];

  typedef enum logic [1:0] {IDLE, UP, DOWN} st_t;
  st_t st;
  feature_t    nf;
  logic [IW:0] hole;

  logic [IW:0] par, lc, rc, mc;
  logic        mc_ok;
  always_comb begin
    par = (hole - 1) >> 1;
    lc = 2 * hole + 1;
    rc = 2 * hole + 2;
    mc = lc;
    if (rc < count && key[rc[IW-1:0]] < key[lc[IW-1:0]]) mc = rc;
    mc_ok = (lc < count) && (key[mc[IW-1:0]] < nf.score);
  end

  assign in_ready = (st == IDLE) && !clear;

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      st <= IDLE; count <= '0; n_dropped <= '0; hole <= '0; nf <= '0;
    end else begin
      unique case (st)
        IDLE: if (in_valid) begin
          nf <= in_feat;
          if (count < (IW + 1)'(CAP)) begin
            hole <= count;
            count <= count + 1;
            st <= UP;
          end else begin
            // full: either the root is evicted or the new feature refused
            n_dropped <= n_dropped + 1;
            if (in_feat.score > key[0]) begin
              hole <= '0;
              st <= DOWN;
            end
          end
        end
        UP: begin
          if (hole != 0 && key[par[IW-1:0]] > nf.score) begin
            data[hole[IW-1:0]] <= data[par[IW-1:0]];
            key[hole[IW-1:0]] <= key[par[IW-1:0]];
            hole <= par;
          end else begin
            data[hole[IW-1:0]] <= nf;
            key[hole[IW-1:0]] <= nf.score;
            st <= IDLE;
          end
        end
        DOWN: begin
          if (mc_ok) begin
            data[hole[IW-1:0]] <= data[mc[IW-1:0]];
            key[hole[IW-1:0]] <= key[mc[IW-1:0]];
            hole <= mc;
          end else begin
            data[hole[IW-1:0]] <= nf;
            key[hole[IW-1:0]] <= nf.score;
            st <= IDLE;
          end
        end
        default: st <= IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) rd_feat <= data[rd_idx];
endmodule
