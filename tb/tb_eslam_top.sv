// tb_eslam_top: end-to-end run of the accelerator on small frames (80x64
// base layer, 4-layer pyramid) against software references: the pyramid
// layers written by Image Resizing, the extracted features of every layer
// (each written feature must equal a reference feature of its layer, and the
// count must equal min(CAP, accepted keypoints)), and the BRIEF Matcher's
// result for every feature (brute-force nearest map descriptor). A small
// heap (8) and keypoint queue (8) make the overflow paths happen. Frame 0
// is a normal frame, frame 1 a key frame whose matching must wait for the
// host's map_update_done. Every mechanism is counted and must occur.
module tb_eslam_top;
  import eslam_pkg::*;
  localparam int W = 80, H = 64, P = 80, CAPT = 8, NMAP = 20;
  localparam int LB = P * H;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  `include "orb_ref.svh"

  axi_req_t req [3];
  axi_rsp_t rsp [3];
  axi_mem_model #(.NPORTS(3)) mem (.clk, .req, .rsp);

  logic frame_start = 0, key_frame = 0, map_update_done = 0;
  logic busy, fe_done, fm_done, waiting_map;
  logic [$clog2(CAPT):0] n_feat;
  logic [15:0] n_kp, kp_dropped, heap_dropped;
  eslam_top #(.W_MAX(128), .H_MAX(H), .PITCH(P), .CAP(CAPT), .KPQ_DEPTH(8), .MAP_MAX(32)) dut (
    .clk, .rst_n, .frame_start, .key_frame, .map_update_done, .frame_base(32'h0), .width(10'(W)),
    .height(9'(H)), .feat_base(32'h20000), .map_base(32'h30000), .n_map(6'(NMAP)), .res_base(32'h40000),
    .busy, .fe_done, .fm_done, .waiting_map, .n_feat, .n_kp, .kp_dropped, .heap_dropped,
    .axi_req(req), .axi_rsp(rsp));

  int pyr [4][64][80];
  int pw [4], ph [4];
  ref_feat_t allref [4][$];
  logic [255:0] mapd [NMAP];
  int cnt_normal = 0, cnt_key_wait = 0, cnt_kp_overflow = 0, cnt_heap_full = 0, cnt_resized = 0;
  int wait_cycles;

  function automatic int mpx(int l, int x, int y);
    logic [63:0] w;
    w = mem.peek(32'(l * LB + y * P + x));
    return int'(w[8 * ((y * P + x) % 8) +: 8]);
  endfunction

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int frame = 0; frame < 2; frame++) begin
      // base layer with rectangles and blobs
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) pyr[0][y][x] = 60 + (x * 3 + y * 5 + frame) % 7;
      for (int b = 0; b < 30; b++) begin
        int x0, y0, w0, h0, v;
        x0 = $urandom_range(2, W - 12); y0 = $urandom_range(2, H - 12);
        w0 = $urandom_range(3, 9); h0 = $urandom_range(3, 9);
        v = (b % 3 == 0) ? 10 : $urandom_range(120, 230);
        for (int y = y0; y < y0 + h0; y++) for (int x = x0; x < x0 + w0; x++) pyr[0][y][x] = v;
      end
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x += 8) begin
        logic [63:0] wv;
        for (int i = 0; i < 8; i++) wv[8 * i +: 8] = 8'(pyr[0][y][x + i]);
        mem.mem[(y * P + x) / 8] = wv;
      end
      pw[0] = W; ph[0] = H;
      for (int l = 1; l < 4; l++) begin
        pw[l] = pw[l - 1] * 5 / 6; ph[l] = ph[l - 1] * 5 / 6;
        for (int y = 0; y < ph[l]; y++) for (int x = 0; x < pw[l]; x++)
          pyr[l][y][x] = pyr[l - 1][(y * 6) / 5][(x * 6) / 5];
      end
      for (int l = 0; l < 4; l++) begin
        ref_w = pw[l]; ref_h = ph[l];
        for (int y = 0; y < ph[l]; y++) for (int x = 0; x < pw[l]; x++) ref_img[y][x] = pyr[l][y][x];
        ref_extract();
        allref[l] = ref_kp;
      end
      $display("frame %0d: reference features per layer %0d %0d %0d %0d", frame,
               allref[0].size(), allref[1].size(), allref[2].size(), allref[3].size());
      // map: noisy copies of some reference descriptors plus random ones
      for (int j = 0; j < NMAP; j++) begin
        for (int k = 0; k < 8; k++) mapd[j][32 * k +: 32] = $urandom;
        if (j % 2 == 0 && allref[0].size() > 0) begin
          mapd[j] = allref[0][$urandom_range(0, allref[0].size() - 1)].desc;
          for (int f = 0; f < 16; f++) mapd[j][$urandom_range(0, 255)] ^= 1'b1;
        end
        for (int k = 0; k < 4; k++) mem.mem[(32'h30000 >> 3) + j * 4 + k] = mapd[j][64 * k +: 64];
      end

      key_frame <= (frame == 1);
      frame_start <= 1; @(posedge clk); frame_start <= 0;
      while (!fe_done) @(posedge clk);
      // check the pyramid the resizer wrote
      for (int l = 1; l < 4; l++) begin
        int bad;
        bad = 0;
        for (int y = 0; y < ph[l]; y++) for (int x = 0; x < pw[l]; x++) if (mpx(l, x, y) != pyr[l][y][x]) bad++;
        checks++;
        if (bad != 0) begin failures++; $display("layer %0d: %0d pixels differ", l, bad); end
        else cnt_resized++;
      end
      if (frame == 1) begin
        // key frame: the host is still updating the map
        wait_cycles = 0;
        repeat (200) begin @(posedge clk); if (waiting_map) wait_cycles++; if (fm_done) break; end
        checks++;
        if (wait_cycles < 150 || fm_done) begin failures++; $display("key frame did not wait"); end
        else cnt_key_wait++;
        map_update_done <= 1; @(posedge clk); map_update_done <= 0;
      end else cnt_normal++;
      while (!fm_done) @(posedge clk);
      @(posedge clk);
      if (kp_dropped != 0) cnt_kp_overflow++;
      if (heap_dropped != 0) cnt_heap_full++;
      // features
      checks++;
      if (int'(n_feat) != ((int'(n_kp) < CAPT) ? int'(n_kp) : CAPT)) begin
        failures++; $display("n_feat %0d n_kp %0d", n_feat, n_kp);
      end
      for (int i = 0; i < int'(n_feat); i++) begin
        logic [63:0] w4, rw;
        logic [255:0] d;
        int x, y, lay, hit, bi, bd;
        longint s;
        for (int k = 0; k < 4; k++) d[64 * k +: 64] = mem.peek(32'h20000 + (i * 5 + k) * 8);
        w4 = mem.peek(32'h20000 + (i * 5 + 4) * 8);
        x = int'(w4[9:0]); y = int'(w4[18:10]); lay = int'(w4[20:19]); s = longint'(w4[52:21]);
        hit = 0;
        foreach (allref[lay][r])
          if (allref[lay][r].x == x && allref[lay][r].y == y && allref[lay][r].score == s &&
              (allref[lay][r].desc === d || allref[lay][r].desc_alt === d)) hit = 1;
        checks++;
        if (!hit) begin failures++; $display("feature %0d (%0d,%0d) layer %0d not in reference", i, x, y, lay); end
        bi = 0; bd = 1000;
        for (int j = 0; j < NMAP; j++) if ($countones(d ^ mapd[j]) < bd) begin bd = $countones(d ^ mapd[j]); bi = j; end
        rw = mem.peek(32'h40000 + 8 * i);
        checks++;
        if (rw !== 64'({9'(bd), 10'(bi)})) begin failures++; $display("match %0d: %h expected %0d/%0d", i, rw, bi, bd); end
      end
    end
    $display("mechanisms: normal=%0d key_wait=%0d kp_overflow=%0d heap_full=%0d layers_resized=%0d",
             cnt_normal, cnt_key_wait, cnt_kp_overflow, cnt_heap_full, cnt_resized);
    checks += 5;
    if (cnt_normal == 0) failures++;
    if (cnt_key_wait == 0) failures++;
    if (cnt_kp_overflow == 0) failures++;
    if (cnt_heap_full == 0) failures++;
    if (cnt_resized == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
