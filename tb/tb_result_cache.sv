// tb_result_cache: random writes interleaved with reads; compares with a
// shadow array.
// Reads have one cycle of latency, which the checks respect. A plain RAM
// per the paper's Result Cache; the word format is this design's.
// Watchdog: a fixed cycle limit.
module tb_result_cache;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [4:0] waddr = 0, raddr = 0;
  logic [18:0] wdata = 0, rdata;
  logic [18:0] shadow [32];
  int checks = 0, failures = 0;
  result_cache #(.NA(32), .W(19)) dut (.*);
  // Watchdog: gives up after a fixed number of cycles.
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(posedge clk);
    for (int i = 0; i < 32; i++) begin
      we <= 1; waddr <= 5'(i); wdata <= 19'($urandom); shadow[i] = wdata;
      @(posedge clk); shadow[i] = wdata;
    end
    for (int t = 0; t < 200; t++) begin
      int a;
      logic [18:0] v;
      a = $urandom_range(0, 31);
      v = 19'($urandom);
      we <= (t % 2 == 0); waddr <= 5'(a); wdata <= v;
      raddr <= 5'($urandom_range(0, 31));
      @(posedge clk);
      if (t % 2 == 0) shadow[a] = v;
      @(negedge clk);
      checks++;
      if (rdata !== shadow[raddr] && !(t % 2 == 0 && raddr == 5'(a))) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
