// tb_image_resizer: a random 64x40 layer in the SDRAM model is downsampled;
// every destination pixel is compared with src(floor(1.2x), floor(1.2y))
// computed in floating point, and the destination size is checked. A second
// run downsamples the result again (as for the next pyramid layer).
// The resizer reaches the model through its AXI master, so handshake
// delays are random. Watchdog: 200,000 cycles. Nearest-neighbour
// downsampling is the paper's; the factor 1.2 is derived, not printed.
module tb_image_resizer;
  import eslam_pkg::*;
  localparam int P = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done;
  logic [31:0] src_base = 0, dst_base = 0;
  logic [XW-1:0] src_w = 0, dst_w;
  logic [YW-1:0] src_h = 0, dst_h;
  axi_req_t req [1];
  axi_rsp_t rsp [1];
  int checks = 0, failures = 0;
  image_resizer #(.PITCH(P)) dut (.clk, .rst_n, .start, .src_base, .dst_base, .src_w, .src_h,
    .dst_w, .dst_h, .busy, .done, .axi_req(req[0]), .axi_rsp(rsp[0]));
  axi_mem_model #(.NPORTS(1)) mem (.clk, .req, .rsp);

  function automatic int px(int base, int x, int y);
    logic [63:0] w;
    w = mem.peek(32'(base + y * P + x));
    return int'(w[8 * ((base + y * P + x) % 8) +: 8]);
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sw, sh, sb, db;
    for (int a = 0; a < 64 * 48 / 8; a++) mem.mem[a] = {$urandom, $urandom};
    repeat (2) @(posedge clk);
    rst_n <= 1;
    sw = 64; sh = 40; sb = 0; db = 32'h4000;
    for (int run = 0; run < 2; run++) begin
      src_base <= 32'(sb); dst_base <= 32'(db); src_w <= XW'(sw); src_h <= YW'(sh);
      start <= 1; @(posedge clk); start <= 0;
      while (!done) @(posedge clk);
      checks++;
      if (int'(dst_w) != sw * 5 / 6 || int'(dst_h) != sh * 5 / 6) failures++;
      for (int y = 0; y < sh * 5 / 6; y++) for (int x = 0; x < sw * 5 / 6; x++) begin
        int e;
        e = px(sb, int'($floor(x * 1.2 + 1e-9)), int'($floor(y * 1.2 + 1e-9)));
        checks++;
        if (px(db, x, y) != e) begin
          failures++;
          if (failures < 5) $display("run %0d (%0d,%0d): %0d vs %0d", run, x, y, px(db, x, y), e);
        end
      end
      sw = sw * 5 / 6; sh = sh * 5 / 6; sb = db; db = 32'h8000;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
