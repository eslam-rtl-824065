// tb_eslam_full: one complete normal frame through the accelerator with every
// parameter at its default: a 640x480 base layer, 4-layer pyramid, heap of
// 1024, 1024 map points. Checks the pyramid written by Image Resizing, every
// extracted feature against the software reference of its layer, the
// feature count, and every match against a brute-force search. Reports the
// cycle count of extraction and matching.
// Uses the behavioural SDRAM model and the software reference of each
// layer. The frame is 400 random rectangles on a faint texture; half of the
// 1024 map descriptors are noisy copies of layer-0 reference descriptors.
// Timing: about 4.3 million clock cycles of simulation; watchdog 20 million.
// Frame size, pyramid depth, heap size and map size are the defaults; the
// map size and the scene are this design's choices.
module tb_eslam_full;
  import eslam_pkg::*;
  localparam int W = 640, H = 480, P = 640, NMAP = 1024;
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
  logic [10:0] n_feat;
  logic [15:0] n_kp, kp_dropped, heap_dropped;
  eslam_top dut (
    .clk, .rst_n, .frame_start, .key_frame, .map_update_done, .frame_base(32'h0), .width(10'(W)),
    .height(9'(H)), .feat_base(32'h200000), .map_base(32'h300000), .n_map(11'(NMAP)), .res_base(32'h400000),
    .busy, .fe_done, .fm_done, .waiting_map, .n_feat, .n_kp, .kp_dropped, .heap_dropped,
    .axi_req(req), .axi_rsp(rsp));

  int pyr [4][480][640];
  int pw [4], ph [4];
  ref_feat_t allref [4][$];
  logic [255:0] mapd [NMAP];
  longint t0, t_fe, t_fm;

  function automatic int mpx(int l, int x, int y);
    logic [63:0] w;
    w = mem.peek(32'(l * LB + y * P + x));
    return int'(w[8 * ((y * P + x) % 8) +: 8]);
  endfunction

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nref;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) pyr[0][y][x] = 60 + (x * 3 + y * 5) % 7;
    for (int b = 0; b < 400; b++) begin
      int x0, y0, w0, h0, v;
      x0 = $urandom_range(2, W - 30); y0 = $urandom_range(2, H - 30);
      w0 = $urandom_range(4, 24); h0 = $urandom_range(4, 24);
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
    nref = 0;
    for (int l = 0; l < 4; l++) begin
      ref_w = pw[l]; ref_h = ph[l];
      for (int y = 0; y < ph[l]; y++) for (int x = 0; x < pw[l]; x++) ref_img[y][x] = pyr[l][y][x];
      ref_extract();
      allref[l] = ref_kp;
      nref += ref_kp.size();
    end
    $display("reference features per layer %0d %0d %0d %0d", allref[0].size(), allref[1].size(),
             allref[2].size(), allref[3].size());
    for (int j = 0; j < NMAP; j++) begin
      for (int k = 0; k < 8; k++) mapd[j][32 * k +: 32] = $urandom;
      if (j % 2 == 0 && allref[0].size() > 0) begin
        mapd[j] = allref[0][$urandom_range(0, allref[0].size() - 1)].desc;
        for (int f = 0; f < 16; f++) mapd[j][$urandom_range(0, 255)] ^= 1'b1;
      end
      for (int k = 0; k < 4; k++) mem.mem[(32'h300000 >> 3) + j * 4 + k] = mapd[j][64 * k +: 64];
    end

    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    frame_start <= 1; t0 = $time / 10; @(posedge clk); frame_start <= 0;
    while (!fe_done) @(posedge clk);
    t_fe = $time / 10 - t0;
    while (!fm_done) @(posedge clk);
    t_fm = $time / 10 - t0 - t_fe;
    @(posedge clk);
    $display("extraction %0d cycles (%0d us at 100 MHz), matching %0d cycles; %0d features, %0d keypoints, %0d queue drops",
             t_fe, t_fe / 100, t_fm, n_feat, n_kp, kp_dropped);
    for (int l = 1; l < 4; l++) begin
      int bad;
      bad = 0;
      for (int y = 0; y < ph[l]; y++) for (int x = 0; x < pw[l]; x++) if (mpx(l, x, y) != pyr[l][y][x]) bad++;
      checks++;
      if (bad != 0) begin failures++; $display("layer %0d: %0d pixels differ", l, bad); end
    end
    checks++;
    if (int'(n_feat) != ((int'(n_kp) < 1024) ? int'(n_kp) : 1024) || (kp_dropped == 0 && int'(n_kp) != nref)) begin
      failures++; $display("n_feat %0d n_kp %0d reference %0d", n_feat, n_kp, nref);
    end
    for (int i = 0; i < int'(n_feat); i++) begin
      logic [63:0] w4, rw;
      logic [255:0] d;
      int x, y, lay, hit, bi, bd;
      longint s;
      for (int k = 0; k < 4; k++) d[64 * k +: 64] = mem.peek(32'h200000 + (i * 5 + k) * 8);
      w4 = mem.peek(32'h200000 + (i * 5 + 4) * 8);
      x = int'(w4[9:0]); y = int'(w4[18:10]); lay = int'(w4[20:19]); s = longint'(w4[52:21]);
      hit = 0;
      foreach (allref[lay][r])
        if (allref[lay][r].x == x && allref[lay][r].y == y && allref[lay][r].score == s &&
            (allref[lay][r].desc === d || allref[lay][r].desc_alt === d)) hit = 1;
      checks++;
      if (!hit) begin failures++; if (failures < 10) $display("feature %0d (%0d,%0d) layer %0d not in reference", i, x, y, lay); end
      bi = 0; bd = 1000;
      for (int j = 0; j < NMAP; j++) if ($countones(d ^ mapd[j]) < bd) begin bd = $countones(d ^ mapd[j]); bi = j; end
      rw = mem.peek(32'h400000 + 8 * i);
      checks++;
      if (rw !== 64'({9'(bd), 10'(bi)})) begin failures++; if (failures < 10) $display("match %0d wrong", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
