// image_resizer: the Image Resizing module, builds the next pyramid layer.
//
// Nearest-neighbour downsampling by a factor of 1.2 from a layer in SDRAM to
// the next layer in SDRAM: dst(x, y) = src(floor(6x/5), floor(6y/5)), with
// dst size floor(5*src_w/6) x floor(5*src_h/6). Both layers are stored with
// the same row pitch PITCH (bytes), 8 pixels per 64-bit word, pixel x of a
// row at byte x. For every destination word the unit reads the (at most two)
// source words its 8 pixels come from, gathers the pixels and writes the
// word, so it runs on its own AXI port while the extractor works on the
// source layer. The paper gives the nearest-neighbour method and the 4-layer
// pyramid; the factor 1.2 is inferred from the paper's pixel-count figures
// (4 layers are 48% more pixels than 2), and the SDRAM layout is this
// design's choice. Bytes past dst_w in the last word of a row are don't-care.
module image_resizer
  import eslam_pkg::*;
#(
  parameter int unsigned PITCH = 640
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] src_base,
  input  logic [ADDR_W-1:0] dst_base,
  input  logic [XW-1:0]     src_w,
  input  logic [YW-1:0]     src_h,
  output logic [XW-1:0]     dst_w,
  output logic [YW-1:0]     dst_h,
  output logic              busy,
  output logic              done,
  output axi_req_t          axi_req,
  input  axi_rsp_t          axi_rsp
);
  logic m_rd_req, m_rd_valid, m_wr_req, m_wr_done, m_busy;
  logic [ADDR_W-1:0] m_rd_addr, m_wr_addr;
  logic [DATA_W-1:0] m_rd_data, m_wr_data;
  axi_master u_axi (.clk, .rst_n, .rd_req(m_rd_req), .rd_addr(m_rd_addr), .rd_valid(m_rd_valid),
                    .rd_data(m_rd_data), .wr_req(m_wr_req), .wr_addr(m_wr_addr), .wr_data(m_wr_data),
                    .wr_done(m_wr_done), .busy(m_busy), .axi_req, .axi_rsp);

  typedef enum logic [2:0] {IDLE, RD0, RD0W, RD1, RD1W, WR, WRW, FIN} st_t;
  st_t st;
  logic [YW-1:0]     y;
  logic [XW-1:0]     wd;          // destination word index in the row
  logic [XW-1:0]     nwords;
  logic [127:0]      src2;        // two consecutive source words
  logic [XW+2:0]     sx0;         // first source column of the word
  logic [YW+2:0]     sy;
  logic [ADDR_W-1:0] row_addr;

  assign dst_w = XW'((int'(src_w) * 5) / 6);
  assign dst_h = YW'((int'(src_h) * 5) / 6);
  assign nwords = XW'((int'(dst_w) + 7) / 8);
  assign sx0 = (XW + 3)'((int'(wd) * 48) / 5);
  assign sy = (YW + 3)'((int'(y) * 6) / 5);
  assign row_addr = src_base + ADDR_W'(int'(sy) * PITCH) + ADDR_W'({sx0[XW+2:3], 3'b000});
  assign busy = (st != IDLE);

  logic [63:0] gathered;
  always_comb begin
    for (int i = 0; i < 8; i++) begin
      int sx;
      sx = ((int'(wd) * 8 + i) * 6) / 5 - int'({sx0[XW+2:3], 3'b000});
      gathered[8 * i +: 8] = src2[8 * sx +: 8];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= IDLE; done <= 1'b0; y <= '0; wd <= '0; src2 <= '0;
      m_rd_req <= 1'b0; m_wr_req <= 1'b0; m_rd_addr <= '0; m_wr_addr <= '0; m_wr_data <= '0;
    end else begin
      done <= 1'b0;
      m_rd_req <= 1'b0;
      m_wr_req <= 1'b0;
      unique case (st)
        IDLE: if (start) begin
          y <= '0; wd <= '0;
          st <= RD0;
        end
        RD0: if (!m_busy && !m_rd_req) begin
          m_rd_req <= 1'b1; m_rd_addr <= row_addr; st <= RD0W;
        end
        RD0W: if (m_rd_valid) begin src2[63:0] <= m_rd_data; st <= RD1; end
        RD1: if (!m_busy && !m_rd_req) begin
          m_rd_req <= 1'b1; m_rd_addr <= row_addr + 8; st <= RD1W;
        end
        RD1W: if (m_rd_valid) begin src2[127:64] <= m_rd_data; st <= WR; end
        WR: if (!m_busy && !m_wr_req) begin
          m_wr_req <= 1'b1;
          m_wr_addr <= dst_base + ADDR_W'(int'(y) * PITCH + int'(wd) * 8);
          m_wr_data <= gathered;
          st <= WRW;
        end
        WRW: if (m_wr_done) begin
          st <= RD0;
          if (wd == nwords - 1) begin
            wd <= '0;
            if (y == dst_h - 1) st <= FIN;
            else y <= y + 1;
          end else wd <= wd + 1;
        end
        FIN: begin done <= 1'b1; st <= IDLE; end
        default: st <= IDLE;
      endcase
    end
  end
endmodule
