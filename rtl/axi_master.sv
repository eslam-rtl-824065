// axi_master: the AXI Interface of the Extractor, Image Resizing and Matcher.
//
// Turns a simple word request into one single-beat AXI4 transaction to SDRAM
// (AxLEN = 0, full 64-bit strobe) and keeps at most one transaction
// outstanding. A read: pulse rd_req with rd_addr while busy is low; AR is
// offered until accepted, then rd_valid pulses for one cycle with rd_data.
// A write: pulse wr_req with wr_addr/wr_data while busy is low; AW and W are
// offered together, each held until accepted, then wr_done pulses when the B
// response arrives. The paper only says the interface reaches SDRAM over AXI;
// beat size, burst length and the single outstanding transaction are this
// design's choices.
module axi_master
  import eslam_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rd_req,
  input  logic [ADDR_W-1:0] rd_addr,
  output logic              rd_valid,
  output logic [DATA_W-1:0] rd_data,
  input  logic              wr_req,
  input  logic [ADDR_W-1:0] wr_addr,
  input  logic [DATA_W-1:0] wr_data,
  output logic              wr_done,
  output logic              busy,
  output axi_req_t          axi_req,
  input  axi_rsp_t          axi_rsp
);
  typedef enum logic [2:0] {IDLE, AR, R, WR, B} st_t;
  st_t st;
  logic aw_pend, w_pend;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= IDLE;
      aw_pend <= 1'b0;
      w_pend <= 1'b0;
      rd_valid <= 1'b0;
      wr_done <= 1'b0;
      rd_data <= '0;
      axi_req <= '0;
    end else begin
      rd_valid <= 1'b0;
      wr_done <= 1'b0;
      unique case (st)
        IDLE: begin
          if (rd_req) begin
            axi_req.araddr <= rd_addr;
            axi_req.arvalid <= 1'b1;
            st <= AR;
          end else if (wr_req) begin
            axi_req.awaddr <= wr_addr;
            axi_req.awvalid <= 1'b1;
            axi_req.wdata <= wr_data;
            axi_req.wstrb <= '1;
            axi_req.wvalid <= 1'b1;
            aw_pend <= 1'b1;
            w_pend <= 1'b1;
            st <= WR;
          end
        end
        AR: if (axi_rsp.arready) begin
          axi_req.arvalid <= 1'b0;
          axi_req.rready <= 1'b1;
          st <= R;
        end
        R: if (axi_rsp.rvalid) begin
          axi_req.rready <= 1'b0;
          rd_data <= axi_rsp.rdata;
          rd_valid <= 1'b1;
          st <= IDLE;
        end
        WR: begin
          if (axi_rsp.awready) begin axi_req.awvalid <= 1'b0; aw_pend <= 1'b0; end
          if (axi_rsp.wready)  begin axi_req.wvalid  <= 1'b0; w_pend  <= 1'b0; end
          if ((!aw_pend || axi_rsp.awready) && (!w_pend || axi_rsp.wready)) begin
            axi_req.bready <= 1'b1;
            st <= B;
          end
        end
        B: if (axi_rsp.bvalid) begin
          axi_req.bready <= 1'b0;
          wr_done <= 1'b1;
          st <= IDLE;
        end
        default: st <= IDLE;
      endcase
    end
  end

  assign busy = (st != IDLE);

  // A request may only be issued while no transaction is outstanding.
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
                                 (st != IDLE) |-> !(rd_req || wr_req));
  // AXI rule: a valid address stays stable until it is accepted.
  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                axi_req.arvalid && !axi_rsp.arready |=> axi_req.arvalid && $stable(axi_req.araddr));
  a_aw_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                axi_req.awvalid && !axi_rsp.awready |=> axi_req.awvalid && $stable(axi_req.awaddr));
  a_w_stable: assert property (@(posedge clk) disable iff (!rst_n)
                               axi_req.wvalid && !axi_rsp.wready |=> axi_req.wvalid && $stable(axi_req.wdata));
endmodule
