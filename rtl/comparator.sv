// comparator: running minimum over the Hamming distances of one descriptor.
//
// Each cycle with en, the smallest valid lane distance (valid_mask) is
// compared with the best so far; `first` starts a new search instead. Ties
// keep the lower map index (lower lane, earlier row). best_dist/best_idx are
// registered and valid the cycle after the last update. The paper says the
// Comparator finds the minimum; the tie rule is this design's choice.
module comparator
  import eslam_pkg::*;
#(
  parameter int unsigned LANES = 4,
  parameter int unsigned IDX_W = 10
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   en,
  input  logic                   first,
  input  logic [LANES-1:0][8:0]  hdist,
  input  logic [LANES-1:0]       valid_mask,
  input  logic [IDX_W-1:0]       base_idx,
  output logic [8:0]             best_dist,
  output logic [IDX_W-1:0]       best_idx
);
  logic [9:0]       m_d;     // 10 bits: 512 means "no valid lane"
  logic [IDX_W-1:0] m_i;
  always_comb begin
    m_d = 10'd512;
    m_i = base_idx;
    for (int l = 0; l < LANES; l++)
      if (valid_mask[l] && 10'(hdist[l]) < m_d) begin
        m_d = 10'(hdist[l]);
        m_i = base_idx + IDX_W'(l);
      end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      best_dist <= '1;
      best_idx <= '0;
    end else if (en) begin
      if ((first || m_d < 10'(best_dist)) && m_d != 10'd512) begin
        best_dist <= m_d[8:0];
        best_idx <= m_i;
      end else if (first) begin
        best_dist <= '1;
        best_idx <= '0;
      end
    end
  end
endmodule
