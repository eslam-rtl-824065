// image_cache: the Image Cache of the ORB Extractor.
//
// Three cache lines (A, B, C), each holding one 8-column strip of the current
// pyramid layer for every row: one 64-bit word, 8 pixels, per row. After
// init the FSM pre-stores two strips in lines A and B (states PRE_A, PRE_B),
// then cycles State 1 -> 2 -> 3 -> 1: in each state one line receives the next
// strip from SDRAM while the other two are read as a 16-column window. This
// follows the paper's three-state rotation (C filled in State 1, A in State 2,
// B in State 3). The line depth (the layer height) and the read format are
// this design's choices.
//
// Interface: wr_en/wr_row/wr_data write into the line being filled;
// `advance` steps the FSM (the caller does so when both the fill and the
// reading of the current state are done). rd_row gives rd_data one cycle later:
// 16 pixels, the older strip in bytes 0..7 (leftmost column in byte 0), the
// newer strip in bytes 8..15.
module image_cache #(
  parameter int unsigned H_MAX = 480
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     init,
  input  logic                     advance,
  input  logic                     wr_en,
  input  logic [$clog2(H_MAX)-1:0] wr_row,
  input  logic [63:0]              wr_data,
  input  logic [$clog2(H_MAX)-1:0] rd_row,
  output logic [127:0]             rd_data,
  output logic [2:0]               state
);
  typedef enum logic [2:0] {PRE_A, PRE_B, S1, S2, S3} st_t;
  st_t st;
  logic [63:0] line_a [H_MAX];
  logic [63:0] line_b [H_MAX];
  logic [63:0] line_c [H_MAX];
  logic [1:0] fill_sel, old_sel;

  always_ff @(posedge clk) begin
    if (!rst_n || init) st <= PRE_A;
    else if (advance) begin
      unique case (st)
        PRE_A: st <= PRE_B;
        PRE_B: st <= S1;
        S1:    st <= S2;
        S2:    st <= S3;
        S3:    st <= S1;
        default: st <= PRE_A;
      endcase
    end
  end

  always_comb begin
    unique case (st)
      PRE_A:   begin fill_sel = 2'd0; old_sel = 2'd0; end
      PRE_B:   begin fill_sel = 2'd1; old_sel = 2'd0; end
      S1:      begin fill_sel = 2'd2; old_sel = 2'd0; end
      S2:      begin fill_sel = 2'd0; old_sel = 2'd1; end
      S3:      begin fill_sel = 2'd1; old_sel = 2'd2; end
      default: begin fill_sel = 2'd0; old_sel = 2'd0; end
    endcase
  end

  always_ff @(posedge clk) begin
    if (wr_en) begin
      if (fill_sel == 2'd0) line_a[wr_row] <= wr_data;
      if (fill_sel == 2'd1) line_b[wr_row] <= wr_data;
      if (fill_sel == 2'd2) line_c[wr_row] <= wr_data;
    end
  end

  logic [63:0] qa, qb, qc;
  logic [1:0]  old_q;
  always_ff @(posedge clk) begin
    qa <= line_a[rd_row];
    qb <= line_b[rd_row];
    qc <= line_c[rd_row];
    old_q <= old_sel;
  end

  always_comb begin
    unique case (old_q)
      2'd0:    rd_data = {qb, qa};
      2'd1:    rd_data = {qc, qb};
      default: rd_data = {qa, qc};
    endcase
  end

  assign state = st;
endmodule
