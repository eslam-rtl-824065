// tb_smoothed_image_cache: fills strips 0..7 one after another (pixel value a
// hash of x and y) and after each strip reads back random pixels of the
// SLOTS most recent strips on both ports.
// Reads have one cycle of latency, which the checks respect. Watchdog:
// 20,000 cycles. The cache is named by the paper; its size (5 strips) and
// two read ports are this design's.
module tb_smoothed_image_cache;
  import eslam_pkg::*;
  localparam int H = 20, S = 5;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0;
  logic [XW-1:0] wr_x = 0, ra_x = 4, rb_x = 4;
  logic [YW-1:0] wr_y = 0, ra_y = 0, rb_y = 0;
  logic [7:0] wr_pix = 0, ra_pix, rb_pix;
  int checks = 0, failures = 0;
  smoothed_image_cache #(.H_MAX(H), .SLOTS(S)) dut (.*);
  function automatic logic [7:0] h(int x, int y);
    return 8'(x * 37 + y * 11) ^ 8'(x >> 3);
  endfunction
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    @(posedge clk);
    for (int k = 0; k < 8; k++) begin
      for (int y = 0; y < H; y++) for (int c = 0; c < 8; c++) begin
        wr_en <= 1; wr_x <= XW'(8 * k + 4 + c); wr_y <= YW'(y); wr_pix <= h(8 * k + 4 + c, y);
        @(posedge clk);
      end
      wr_en <= 0;
      for (int t = 0; t < 60; t++) begin
        int ka, kb, xa, xb, ya, yb;
        ka = k - $urandom_range(0, (k < S - 1) ? k : S - 1);
        kb = k - $urandom_range(0, (k < S - 1) ? k : S - 1);
        xa = 8 * ka + 4 + $urandom_range(0, 7); ya = $urandom_range(0, H - 1);
        xb = 8 * kb + 4 + $urandom_range(0, 7); yb = $urandom_range(0, H - 1);
        ra_x <= XW'(xa); ra_y <= YW'(ya); rb_x <= XW'(xb); rb_y <= YW'(yb);
        @(posedge clk); @(negedge clk);
        checks += 2;
        if (ra_pix !== h(xa, ya)) failures++;
        if (rb_pix !== h(xb, yb)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
