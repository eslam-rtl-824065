// sync_fifo: single-clock first-in first-out buffer (helper).
//
// DEPTH entries of W bits. push when not full, pop when not empty; the head
// is shown combinationally on dout. Pushing into a full FIFO is refused
// (the caller counts the loss). Used as the keypoint queue of the extractor.
// Timing: push and pop take effect at the clock edge; a word pushed into an
// empty FIFO is visible on dout the next cycle. Synchronous clear empties it.
// This helper is not a block of the paper: the paper only says keypoints are
// streamed from detection to descriptor computation.
module sync_fifo #(
  parameter int unsigned W     = 51,
  parameter int unsigned DEPTH = 512
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         push,
  input  logic [W-1:0] din,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         empty,
  output logic         full
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wp, rp;
  assign empty = (wp == rp);
  assign full  = (wp[AW-1:0] == rp[AW-1:0]) && (wp[AW] != rp[AW]);
  assign dout  = mem[rp[AW-1:0]];
  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (push && !full) begin
        mem[wp[AW-1:0]] <= din;
        wp <= wp + 1;
      end
      if (pop && !empty) rp <= rp + 1;
    end
  end
endmodule
