// tb_brief_matcher: loads random current-frame descriptors through the
// extractor-side port and random map descriptors into the SDRAM model (some
// map points are noisy copies of frame descriptors so that close matches
// exist), runs the matcher and compares every result word with a brute-force
// minimum search (ties to the lower index). Also checks that the distance
// phase takes n_a * ceil(n_b / LANES) cycles. Several sizes, including n_b not
// a multiple of LANES.
// Watchdog: 200,000 cycles. The matcher structure (descriptor cache,
// distance computing, comparator, result cache) is the paper's; the result
// word format and the lane count are this design's.
module tb_brief_matcher;
  import eslam_pkg::*;
  localparam int NA = 16, NB = 32, L = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic desc_valid = 0, start = 0, busy, done;
  logic [3:0] desc_idx = 0;
  logic [NBITS-1:0] desc = 0;
  logic [4:0] n_a = 0;
  logic [5:0] n_b = 0;
  logic [31:0] compute_cycles;
  axi_req_t req [1];
  axi_rsp_t rsp [1];
  int checks = 0, failures = 0;
  logic [NBITS-1:0] da [NA], db [NB];
  brief_matcher #(.NA(NA), .NB(NB), .LANES(L)) dut (.clk, .rst_n, .desc_valid, .desc_idx, .desc,
    .start, .n_a, .n_b, .map_base(32'h10000), .res_base(32'h20000), .busy, .done, .compute_cycles,
    .axi_req(req[0]), .axi_rsp(rsp[0]));
  axi_mem_model #(.NPORTS(1)) mem (.clk, .req, .rsp);

  function automatic int hd(logic [NBITS-1:0] a, logic [NBITS-1:0] b);
    return $countones(a ^ b);
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < 4; t++) begin
      int na, nb;
      na = (t == 0) ? 16 : $urandom_range(1, NA);
      nb = (t == 0) ? 32 : (t == 1) ? 7 : $urandom_range(1, NB);
      for (int i = 0; i < NA; i++) for (int k = 0; k < 8; k++) da[i][32 * k +: 32] = $urandom;
      for (int j = 0; j < NB; j++) begin
        for (int k = 0; k < 8; k++) db[j][32 * k +: 32] = $urandom;
        if (j % 3 == 0) begin
          db[j] = da[$urandom_range(0, na - 1)];
          for (int f = 0; f < 20; f++) db[j][$urandom_range(0, 255)] ^= 1'b1;
        end
        for (int wd = 0; wd < 4; wd++) mem.mem[(32'h10000 >> 3) + j * 4 + wd] = db[j][64 * wd +: 64];
      end
      for (int i = 0; i < na; i++) begin
        desc_valid <= 1; desc_idx <= 4'(i); desc <= da[i];
        @(posedge clk);
      end
      desc_valid <= 0;
      n_a <= 5'(na); n_b <= 6'(nb); start <= 1;
      @(posedge clk); start <= 0;
      while (!done) @(posedge clk);
      for (int i = 0; i < na; i++) begin
        int bi, bd;
        logic [63:0] wv;
        bi = 0; bd = 1000;
        for (int j = 0; j < nb; j++) if (hd(da[i], db[j]) < bd) begin bd = hd(da[i], db[j]); bi = j; end
        wv = mem.peek(32'h20000 + 8 * i);
        checks++;
        if (wv !== 64'({9'(bd), 10'(bi)})) begin
          failures++;
          $display("t%0d i%0d: got idx %0d dist %0d, expected %0d %0d", t, i, wv[9:0], wv[18:10], bi, bd);
        end
      end
      checks++;
      if (compute_cycles != 32'(na * ((nb + L - 1) / L))) begin
        failures++;
        $display("compute cycles %0d", compute_cycles);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
