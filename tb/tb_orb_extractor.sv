// tb_orb_extractor: one 80x64 layer with bright and dark rectangles, blobs and
// noise is placed in the SDRAM model; the extractor runs, the heap is drained
// and every feature written back is compared with the software reference
// (tb/orb_ref.svh): same keypoints, Harris scores and steered RS-BRIEF
// descriptors. A second instance on the same layer, with a heap of 4 and a
// 4-entry keypoint queue, checks that only the 4 strongest of the keypoints
// that got through are kept and that the queue-overflow and heap-drop
// counters add up. Both instances run twice (two frames, heap cleared in
// between). The strip streaming, the detect-describe-filter order and the
// heap size of the full design are the paper's; these small sizes are only
// for the test. Watchdog: 2,000,000 cycles.
module tb_orb_extractor;
  import eslam_pkg::*;
  localparam int W = 80, H = 64, P = 80;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  `include "orb_ref.svh"

  axi_req_t req [2];
  axi_rsp_t rsp [2];
  axi_mem_model #(.NPORTS(2)) mem (.clk, .req, .rsp);

  logic clear = 0, start = 0, drain = 0;
  logic busy [2], done [2], drain_done [2], desc_valid [2];
  logic [6:0] n_feat0;
  logic [2:0] n_feat1;
  logic [5:0] desc_idx0;
  logic [1:0] desc_idx1;
  logic [NBITS-1:0] desc [2];
  logic [15:0] n_kp [2], kp_dropped [2], heap_dropped [2];

  orb_extractor #(.W_MAX(128), .H_MAX(H), .PITCH(P), .CAP(64), .KPQ_DEPTH(64)) dut (
    .clk, .rst_n, .clear, .start, .layer(2'd1), .base(32'h0), .width(10'(W)), .height(9'(H)),
    .busy(busy[0]), .done(done[0]), .drain, .feat_base(32'h8000), .drain_done(drain_done[0]),
    .n_feat(n_feat0), .desc_valid(desc_valid[0]), .desc_idx(desc_idx0), .desc(desc[0]), .n_kp(n_kp[0]),
    .kp_dropped(kp_dropped[0]), .heap_dropped(heap_dropped[0]), .axi_req(req[0]), .axi_rsp(rsp[0]));
  orb_extractor #(.W_MAX(128), .H_MAX(H), .PITCH(P), .CAP(4), .KPQ_DEPTH(4)) dut_small (
    .clk, .rst_n, .clear, .start, .layer(2'd1), .base(32'h0), .width(10'(W)), .height(9'(H)),
    .busy(busy[1]), .done(done[1]), .drain, .feat_base(32'hC000), .drain_done(drain_done[1]),
    .n_feat(n_feat1), .desc_valid(desc_valid[1]), .desc_idx(desc_idx1), .desc(desc[1]), .n_kp(n_kp[1]),
    .kp_dropped(kp_dropped[1]), .heap_dropped(heap_dropped[1]), .axi_req(req[1]), .axi_rsp(rsp[1]));

  int ndesc0;
  always @(posedge clk) if (desc_valid[0]) ndesc0++;

  task automatic make_image(int seed);
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) ref_img[y][x] = 60 + (x * 3 + y * 5 + seed) % 7;
    for (int b = 0; b < 14; b++) begin
      int x0, y0, w0, h0, v;
      x0 = $urandom_range(10, W - 14); y0 = $urandom_range(10, H - 14);
      w0 = $urandom_range(3, 9); h0 = $urandom_range(3, 9);
      v = (b % 3 == 0) ? 10 : $urandom_range(120, 230);
      for (int y = y0; y < y0 + h0; y++) for (int x = x0; x < x0 + w0; x++) ref_img[y][x] = v;
    end
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x += 8) begin
      logic [63:0] wv;
      for (int i = 0; i < 8; i++) wv[8 * i +: 8] = 8'(ref_img[y][x + i]);
      mem.mem[(y * P + x) / 8] = wv;
    end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_w = W; ref_h = H; ndesc0 = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int frame = 0; frame < 2; frame++) begin
      int found;
      longint sc[$];
      make_image(frame);
      ref_extract();
      $display("frame %0d: reference has %0d features", frame, ref_kp.size());
      clear <= 1; @(posedge clk); clear <= 0;
      start <= 1; @(posedge clk); start <= 0;
      fork
        begin while (!done[0]) @(posedge clk); end
        begin while (!done[1]) @(posedge clk); end
      join
      ndesc0 = 0;
      drain <= 1; @(posedge clk); drain <= 0;
      fork
        begin while (!drain_done[0]) @(posedge clk); end
        begin while (!drain_done[1]) @(posedge clk); end
      join
      @(posedge clk);
      checks++;
      if (int'(n_feat0) != ref_kp.size() || ndesc0 != ref_kp.size()) begin
        failures++;
        $display("feature count %0d (matcher saw %0d), expected %0d", n_feat0, ndesc0, ref_kp.size());
      end
      found = 0;
      for (int i = 0; i < int'(n_feat0); i++) begin
        logic [63:0] w4;
        logic [255:0] d;
        int x, y, lay;
        longint s;
        for (int k = 0; k < 4; k++) d[64 * k +: 64] = mem.peek(32'h8000 + (i * 5 + k) * 8);
        w4 = mem.peek(32'h8000 + (i * 5 + 4) * 8);
        x = int'(w4[9:0]); y = int'(w4[18:10]); lay = int'(w4[20:19]); s = longint'(w4[52:21]);
        foreach (ref_kp[r]) if (ref_kp[r].x == x && ref_kp[r].y == y) begin
          found++;
          checks++;
          if (s != ref_kp[r].score || lay != 1 || (d !== ref_kp[r].desc && d !== ref_kp[r].desc_alt)) begin
            failures++;
            $display("feature (%0d,%0d): score %0d/%0d desc match %0d", x, y, s, ref_kp[r].score, d === ref_kp[r].desc);
          end
        end
      end
      checks++;
      if (found != ref_kp.size()) begin failures++; $display("matched %0d of %0d", found, ref_kp.size()); end
      // small heap keeps the 4 best of what its 4-entry queue let through
      checks++;
      if (int'(n_feat1) != ((int'(n_kp[1]) < 4) ? int'(n_kp[1]) : 4)) failures++;
      checks++;
      if (kp_dropped[1] == 0 || int'(n_kp[1]) + int'(kp_dropped[1]) != ref_kp.size()) begin
        failures++;
        $display("small: n_kp %0d dropped %0d", n_kp[1], kp_dropped[1]);
      end
      $display("small heap: n_kp %0d dropped %0d kept %0d", n_kp[1], kp_dropped[1], n_feat1);
      for (int i = 0; i < int'(n_feat1); i++) sc.push_back(longint'(mem.peek(32'hC000 + (i * 5 + 4) * 8) >> 21));
      sc.sort();
      checks++;
      if (int'(heap_dropped[1]) + int'(n_feat1) != int'(n_kp[1])) failures++;
      checks++;
      if (heap_dropped[1] == 0) begin failures++; $display("small heap never full"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
