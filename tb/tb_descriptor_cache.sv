// tb_descriptor_cache: writes random descriptors to both memories in random
// order, then reads D_A words and D_B rows of LANES descriptors back.
// Both read ports have one cycle of latency, which the checks respect.
// The two memories are the paper's D_A and D_B; reading D_B four
// descriptors per row is this design's choice. Watchdog: a fixed limit.
module tb_descriptor_cache;
  import eslam_pkg::*;
  localparam int NA = 8, NB = 16, L = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic a_we = 0, b_we = 0;
  logic [2:0] a_waddr = 0, a_raddr = 0;
  logic [3:0] b_waddr = 0;
  logic [1:0] b_raddr = 0;
  logic [NBITS-1:0] a_wdata = 0, b_wdata = 0, a_rdata;
  logic [L-1:0][NBITS-1:0] b_rdata;
  logic [NBITS-1:0] ra [NA], rb [NB];
  int checks = 0, failures = 0;
  descriptor_cache #(.NA(NA), .NB(NB), .LANES(L)) dut (.*);
  // Watchdog: gives up after a fixed number of cycles.
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NA; i++) for (int k = 0; k < 8; k++) ra[i][32 * k +: 32] = $urandom;
    for (int i = 0; i < NB; i++) for (int k = 0; k < 8; k++) rb[i][32 * k +: 32] = $urandom;
    @(posedge clk);
    for (int i = NB - 1; i >= 0; i--) begin
      b_we <= 1; b_waddr <= 4'(i); b_wdata <= rb[i];
      a_we <= (i < NA); a_waddr <= 3'(i); a_wdata <= ra[i % NA];
      @(posedge clk);
    end
    a_we <= 0; b_we <= 0;
    for (int r = 0; r < NB / L; r++) begin
      b_raddr <= 2'(r); a_raddr <= 3'(r);
      @(posedge clk); @(negedge clk);
      checks++;
      if (a_rdata !== ra[r]) failures++;
      for (int l = 0; l < L; l++) begin
        checks++;
        if (b_rdata[l] !== rb[r * L + l]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
