// tb_axi_master: 300 random single-word writes and reads through the AXI
// master into the behavioural memory, against a shadow copy. Checks that
// every write lands in memory, every read returns the shadow value, that
// rd_valid / wr_done are one-cycle pulses, busy is low between requests,
// each request completes within 16 cycles and the word counts agree.
// The memory model adds random 0..3-cycle delays on every handshake, and the
// master's assertions check that valid signals are held until accepted.
// Interface: drives rd_req/wr_req as a client of the master. Watchdog:
// 20,000 cycles. The paper names an AXI interface only; single-beat,
// one-outstanding transactions are this design's choice.
module tb_axi_master;
  import eslam_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic rd_req, wr_req, rd_valid, wr_done, busy;
  logic [ADDR_W-1:0] rd_addr, wr_addr;
  logic [DATA_W-1:0] rd_data, wr_data;
  axi_req_t req [1];
  axi_rsp_t rsp [1];
  int checks = 0, failures = 0;
  logic [DATA_W-1:0] ref_d [16];

  axi_master dut (.clk, .rst_n, .rd_req, .rd_addr, .rd_valid, .rd_data, .wr_req, .wr_addr,
                  .wr_data, .wr_done, .busy, .axi_req(req[0]), .axi_rsp(rsp[0]));
  axi_mem_model #(.NPORTS(1)) mem (.clk, .req, .rsp);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nw, nr;
    rd_req = 0; wr_req = 0; rd_addr = 0; wr_addr = 0; wr_data = 0;
    for (int i = 0; i < 16; i++) ref_d[i] = '0;
    for (int i = 0; i < 16; i++) mem.mem[(32'h1000 >> 3) + i] = '0;
    nw = 0; nr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // random mix of writes and reads over 16 words, checked against a shadow
    for (int t = 0; t < 300; t++) begin
      int a, lat, pulses;
      a = $urandom_range(0, 15);
      checks++;
      if (busy) failures++;
      if ($urandom_range(0, 1) == 0) begin
        ref_d[a] = {$urandom, $urandom};
        wr_addr <= 32'h1000 + 8 * a;
        wr_data <= ref_d[a];
        wr_req <= 1;
        @(posedge clk);
        wr_req <= 0;
        lat = 0; pulses = 0;
        do begin @(posedge clk); lat++; end while (!wr_done);
        nw++;
        @(posedge clk);
        if (wr_done) pulses++;
        checks++;
        if (mem.peek(32'h1000 + 8 * a) !== ref_d[a] || pulses != 0 || lat > 16) begin
          failures++;
          $display("write %0d to word %0d: memory %h expected %h, latency %0d", t, a,
                   mem.peek(32'h1000 + 8 * a), ref_d[a], lat);
        end
      end else begin
        rd_addr <= 32'h1000 + 8 * a;
        rd_req <= 1;
        @(posedge clk);
        rd_req <= 0;
        lat = 0;
        do begin @(posedge clk); lat++; end while (!rd_valid);
        nr++;
        checks++;
        if (rd_data !== ref_d[a] || lat > 16) begin
          failures++;
          $display("read %0d of word %0d: got %h expected %h, latency %0d", t, a, rd_data, ref_d[a], lat);
        end
        @(posedge clk);
        checks++;
        if (rd_valid) failures++;
      end
    end
    checks++;
    if (mem.writes != nw || mem.reads != nr) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
