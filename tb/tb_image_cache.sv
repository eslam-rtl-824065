// tb_image_cache: writes strips 1..6 of a small synthetic image through the
// FSM (pre-store A and B, then one strip per state) and checks that every
// state reads the two strips the rotation prescribes, in the right order.
// Pixel words are a hash of row and strip, so a word read from the wrong
// line or row is caught. Reads have one cycle of latency. The three lines
// and the A/B/C rotation follow the paper's figure of the cache I/O; the
// word layout is this design's. Watchdog: 5,000 cycles.
module tb_image_cache;
  localparam int H = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic init = 0, advance = 0, wr_en = 0;
  logic [3:0] wr_row = 0, rd_row = 0;
  logic [63:0] wr_data = 0;
  logic [127:0] rd_data;
  logic [2:0] state;
  int checks = 0, failures = 0;

  image_cache #(.H_MAX(H)) dut (.*);

  function automatic logic [63:0] word(input int strip, input int row);
    return {8{8'(strip * 16 + row)}} ^ 64'h0706050403020100;
  endfunction

  task automatic fill(input int strip);
    for (int r = 0; r < H; r++) begin
      wr_en <= 1; wr_row <= 4'(r); wr_data <= word(strip, r);
      @(posedge clk);
    end
    wr_en <= 0;
  endtask

  task automatic check_read(input int older, input int newer);
    for (int r = 0; r < H; r++) begin
      rd_row <= 4'(r);
      @(posedge clk);
      @(negedge clk);
      checks++;
      if (rd_data !== {word(newer, r), word(older, r)}) begin
        failures++;
        $display("state %0d row %0d: got %h expected strips %0d,%0d", state, r, rd_data, older, newer);
      end
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    init <= 1; @(posedge clk); init <= 0;
    fill(1); advance <= 1; @(posedge clk); advance <= 0;
    fill(2); advance <= 1; @(posedge clk); advance <= 0;
    for (int s = 1; s <= 4; s++) begin
      // state s reads strips s, s+1 while strip s+2 fills
      fill(s + 2);
      check_read(s, s + 1);
      advance <= 1; @(posedge clk); advance <= 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
