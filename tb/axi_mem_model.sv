// axi_mem_model: behavioural model of the SDRAM seen through NPORTS AXI slave
// ports (not synthesizable; testbench only). Single-beat transactions, a
// sparse word memory addressed by byte address / 8, and a pseudo-random delay
// of 0..3 cycles on every handshake so that the masters see back-pressure.
// Each port serves one read (AR then R) or one write (AW and W then B) at a
// time; peek() returns a word for checking and `mem` may be preloaded by a
// testbench. reads/writes count the words moved. It stands in for the
// board's DRAM and its controller, which the accelerator only reaches over
// AXI; its latency is arbitrary and not that of any real part.
module axi_mem_model
  import eslam_pkg::*;
#(
  parameter int NPORTS = 1
) (
  input  logic     clk,
  input  axi_req_t req [NPORTS],
  output axi_rsp_t rsp [NPORTS]
);
  logic [DATA_W-1:0] mem [int unsigned];
  int reads, writes;

  function automatic logic [DATA_W-1:0] peek(input int unsigned a);
    if (mem.exists(a >> 3)) return mem[a >> 3];
    return '0;
  endfunction

  initial begin
    reads = 0;
    writes = 0;
    for (int i = 0; i < NPORTS; i++) rsp[i] = '0;
  end

  for (genvar p = 0; p < NPORTS; p++) begin : g_port
    logic [ADDR_W-1:0] aw_a;
    logic [DATA_W-1:0] w_d;
    logic got_aw, got_w;
    initial begin got_aw = 0; got_w = 0; aw_a = '0; w_d = '0; end
    // Read channel.
    initial forever begin
      @(posedge clk);
      if (req[p].arvalid) begin
        logic [ADDR_W-1:0] a;
        repeat ($urandom_range(0, 3)) @(posedge clk);
        rsp[p].arready <= 1'b1;
        a = req[p].araddr;
        @(posedge clk);
        rsp[p].arready <= 1'b0;
        repeat ($urandom_range(0, 3)) @(posedge clk);
        rsp[p].rdata  <= peek(a);
        rsp[p].rvalid <= 1'b1;
        reads++;
        do @(posedge clk); while (!req[p].rready);
        rsp[p].rvalid <= 1'b0;
      end
    end
    // Write channels.
    initial forever begin
      @(posedge clk);
      if (req[p].awvalid || req[p].wvalid) begin
        repeat ($urandom_range(0, 2)) @(posedge clk);
        rsp[p].awready <= 1'b1;
        rsp[p].wready <= 1'b1;
        aw_a = req[p].awaddr;
        w_d = req[p].wdata;
        @(posedge clk);
        rsp[p].awready <= 1'b0;
        rsp[p].wready <= 1'b0;
        mem[aw_a >> 3] = w_d;
        writes++;
        rsp[p].bvalid <= 1'b1;
        do @(posedge clk); while (!req[p].bready);
        rsp[p].bvalid <= 1'b0;
      end
    end
  end
endmodule
