// tb_feature_heap: streams random features (many equal scores) into a heap of
// 16, more than it can hold, then reads all entries back. Checks: the kept
// scores are exactly the 16 largest of the stream (as a multiset), each kept
// payload matches the feature it came with, the heap order holds, the drop
// counter and the per-insert latency bound. Repeats after `clear`.
// Watchdog: 100,000 cycles. The paper gives the heap and its capacity of
// 1024 best features; the min-at-root order and the stall while sifting are
// this design's and are what is checked.
module tb_feature_heap;
  import eslam_pkg::*;
  localparam int CAP = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, in_valid = 0, in_ready;
  feature_t in_feat, rd_feat;
  logic [3:0] rd_idx = 0;
  logic [4:0] count;
  logic [15:0] n_dropped;
  int checks = 0, failures = 0;
  feature_heap #(.CAP(CAP)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_feat = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int round = 0; round < 4; round++) begin
      int scores[$], kept[$], n, nd_ref, maxlat;
      feature_t got [CAP];
      scores.delete(); kept.delete();
      n = 20 + 40 * round;
      clear <= 1; @(posedge clk); clear <= 0;
      maxlat = 0;
      for (int i = 0; i < n; i++) begin
        int s, lat;
        s = $urandom_range(1, 40);
        scores.push_back(s);
        in_feat.score <= SCORE_W'(s);
        in_feat.x <= XW'(i); in_feat.y <= YW'(s * 3); in_feat.layer <= 2'(i);
        in_feat.desc <= {8{32'(s * 7 + 1)}};
        in_valid <= 1;
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        in_valid <= 0;
        lat = 0;
        @(posedge clk);
        while (!in_ready) begin @(posedge clk); lat++; end
        if (lat > maxlat) maxlat = lat;
      end
      // reference: top CAP scores
      scores.rsort();
      nd_ref = 0;
      checks++;
      if (int'(count) != ((n < CAP) ? n : CAP)) failures++;
      for (int i = 0; i < int'(count); i++) begin
        rd_idx <= 4'(i); @(posedge clk); @(negedge clk);
        got[i] = rd_feat;
        kept.push_back(int'(rd_feat.score));
        checks++;
        if (rd_feat.y != YW'(rd_feat.score * 3) || rd_feat.desc != {8{32'(rd_feat.score * 7 + 1)}}) failures++;
      end
      for (int i = 1; i < int'(count); i++) begin
        checks++;
        if (got[(i - 1) / 2].score > got[i].score) failures++;
      end
      kept.rsort();
      for (int i = 0; i < kept.size(); i++) begin
        checks++;
        if (kept[i] != scores[i]) begin
          failures++;
          $display("round %0d rank %0d: kept %0d expected %0d", round, i, kept[i], scores[i]);
        end
      end
      checks++;
      if (maxlat > $clog2(CAP) + 1) failures++;
      // every feature offered and not kept was refused or evicted
      nd_ref = (n > CAP) ? n - CAP : 0;
      checks++;
      if (int'(n_dropped) != nd_ref) begin failures++; $display("dropped %0d expected %0d", n_dropped, nd_ref); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
