// brief_matcher: the BRIEF Matcher.
//
// Matches every descriptor of the current frame (D_A, delivered by the ORB
// Extractor into the Descriptor Cache as it drains its heap) with the map
// points of the global map (D_B, read from SDRAM). After `start` it
//   1. loads n_b map descriptors from map_base (4 words of 64 bits each,
//      word w holding descriptor bits 64w..64w+63) into D_B,
//   2. for each D_A descriptor i streams the D_B rows through Distance
//      Computing, LANES Hamming distances per cycle, and the Comparator keeps
//      the minimum; the match {distance, index} goes to the Result Cache,
//   3. writes one 64-bit word per D_A descriptor to res_base + 8*i:
//      bits [9:0] map index, bits [18:10] Hamming distance,
// and pulses done. Step 2 takes n_a * ceil(n_b/LANES) cycles plus a two-cycle
// pipeline tail. The Descriptor Cache / Distance Computing / Comparator /
// Result Cache structure is the paper's; the lane count, the SDRAM layout and
// the sequencing are this design's choices.
// The result word fills only 19 of the 64 AXI write-data bits; the upper 45
// bits are constant zero by design.
module brief_matcher
  import eslam_pkg::*;
#(
  parameter int unsigned NA    = 1024,
  parameter int unsigned NB    = 1024,
  parameter int unsigned LANES = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   desc_valid,
  input  logic [$clog2(NA)-1:0]  desc_idx,
  input  logic [NBITS-1:0]       desc,
  input  logic                   start,
  input  logic [$clog2(NA):0]    n_a,
  input  logic [$clog2(NB):0]    n_b,
  input  logic [ADDR_W-1:0]      map_base,
  input  logic [ADDR_W-1:0]      res_base,
  output logic                   busy,
  output logic                   done,
  output logic [31:0]            compute_cycles,
  output axi_req_t               axi_req,
  input  axi_rsp_t               axi_rsp
);
  localparam int unsigned AIW = $clog2(NA);
  localparam int unsigned BIW = $clog2(NB);
  localparam int unsigned RW  = $clog2(NB / LANES);

  typedef enum logic [3:0] {IDLE, LB_REQ, LB_WAIT, CMP, CMP_DRAIN, WR_RD, WR_REQ, WR_WAIT, FIN} st_t;
  st_t st;

  // AXI interface
  logic m_rd_req, m_rd_valid, m_wr_req, m_wr_done, m_busy;
  logic [ADDR_W-1:0] m_rd_addr, m_wr_addr;
  logic [DATA_W-1:0] m_rd_data, m_wr_data;
  axi_master u_axi (.clk, .rst_n, .rd_req(m_rd_req), .rd_addr(m_rd_addr), .rd_valid(m_rd_valid),
                    .rd_data(m_rd_data), .wr_req(m_wr_req), .wr_addr(m_wr_addr), .wr_data(m_wr_data),
                    .wr_done(m_wr_done), .busy(m_busy), .axi_req, .axi_rsp);

  // Descriptor cache
  logic                         b_we;
  logic [BIW-1:0]               b_waddr;
  logic [NBITS-1:0]             b_wdata;
  logic [AIW-1:0]               a_raddr;
  logic [RW-1:0]                b_raddr;
  logic [NBITS-1:0]             a_rdata;
  logic [LANES-1:0][NBITS-1:0]  b_rdata;
  descriptor_cache #(.NA(NA), .NB(NB), .LANES(LANES)) u_dc (
    .clk, .a_we(desc_valid), .a_waddr(desc_idx), .a_wdata(desc), .a_raddr, .a_rdata,
    .b_we, .b_waddr, .b_wdata, .b_raddr, .b_rdata);

  // Distance computing and comparator
  logic [LANES-1:0][8:0] hdist;
  distance_computing #(.LANES(LANES)) u_dist (.a(a_rdata), .b(b_rdata), .hdist);

  logic             s1_valid, s1_first, s1_last;
  logic [AIW-1:0]   s1_i;
  logic [RW-1:0]    s1_r;
  logic             s2_valid;
  logic [AIW-1:0]   s2_i;
  logic [LANES-1:0] vmask;
  logic [8:0]       best_dist;
  logic [BIW-1:0]   best_idx;
  always_comb
    for (int l = 0; l < LANES; l++)
      vmask[l] = (int'(s1_r) * LANES + l) < int'(n_b);
  comparator #(.LANES(LANES), .IDX_W(BIW)) u_cmp (
    .clk, .rst_n, .en(s1_valid), .first(s1_first), .hdist, .valid_mask(vmask),
    .base_idx(BIW'(int'(s1_r) * LANES)), .best_dist, .best_idx);

  // Result cache
  logic [AIW-1:0]        r_raddr;
  logic [9+BIW-1:0]      r_rdata;
  result_cache #(.NA(NA), .W(9 + BIW)) u_rc (
    .clk, .we(s2_valid), .waddr(s2_i), .wdata({best_dist, best_idx}), .raddr(r_raddr), .rdata(r_rdata));

  logic [BIW:0]      j;
  logic [1:0]        w;
  logic [AIW:0]      i;
  logic [RW:0]       r, rows;
  logic [1:0]        drain;

  assign rows = (RW + 1)'((int'(n_b) + LANES - 1) / LANES);
  assign busy = (st != IDLE);
  assign a_raddr = i[AIW-1:0];
  assign b_raddr = r[RW-1:0];
  assign r_raddr = i[AIW-1:0];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= IDLE; done <= 1'b0; j <= '0; w <= '0; i <= '0; r <= '0; drain <= '0;
      m_rd_req <= 1'b0; m_wr_req <= 1'b0; m_rd_addr <= '0; m_wr_addr <= '0; m_wr_data <= '0;
      b_we <= 1'b0; b_waddr <= '0; b_wdata <= '0;
      s1_valid <= 1'b0; s1_first <= 1'b0; s1_last <= 1'b0; s1_i <= '0; s1_r <= '0;
      s2_valid <= 1'b0; s2_i <= '0; compute_cycles <= '0;
    end else begin
      done <= 1'b0;
      m_rd_req <= 1'b0;
      m_wr_req <= 1'b0;
      b_we <= 1'b0;
      s1_valid <= 1'b0;
      s2_valid <= s1_valid && s1_last;
      s2_i <= s1_i;
      unique case (st)
        IDLE: if (start) begin
          j <= '0; w <= '0; i <= '0; r <= '0;
          compute_cycles <= '0;
          st <= (n_b == 0) ? ((n_a == 0) ? FIN : CMP) : LB_REQ;
        end
        LB_REQ: if (!m_busy && !m_rd_req) begin
          m_rd_req <= 1'b1;
          m_rd_addr <= map_base + ADDR_W'((int'(j) * 4 + int'(w)) * 8);
          st <= LB_WAIT;
        end
        LB_WAIT: if (m_rd_valid) begin
          b_wdata[64 * w +: 64] <= m_rd_data;
          w <= w + 1;
          st <= LB_REQ;
          if (w == 2'd3) begin
            b_we <= 1'b1;
            b_waddr <= j[BIW-1:0];
            j <= j + 1;
            if (j + 1 == n_b) st <= (n_a == 0) ? FIN : CMP;
          end
        end
        CMP: begin
          compute_cycles <= compute_cycles + 1;
          s1_valid <= 1'b1;
          s1_first <= (r == 0);
          s1_last <= (r == rows - 1);
          s1_i <= i[AIW-1:0];
          s1_r <= r[RW-1:0];
          if (r == rows - 1) begin
            r <= '0;
            if (i == n_a - 1) begin i <= '0; st <= CMP_DRAIN; drain <= '0; end
            else i <= i + 1;
          end else r <= r + 1;
        end
        CMP_DRAIN: begin
          drain <= drain + 1;
          if (drain == 2'd2) st <= WR_RD;
        end
        WR_RD: st <= WR_REQ;          // result cache read latency
        WR_REQ: if (!m_busy && !m_wr_req) begin
          m_wr_req <= 1'b1;
          m_wr_addr <= res_base + ADDR_W'(int'(i) * 8);
          m_wr_data <= DATA_W'({r_rdata[9+BIW-1:BIW], 10'(r_rdata[BIW-1:0])});
          st <= WR_WAIT;
        end
        WR_WAIT: if (m_wr_done) begin
          if (i == n_a - 1) st <= FIN;
          else begin i <= i + 1; st <= WR_RD; end
        end
        FIN: begin done <= 1'b1; st <= IDLE; end
        default: st <= IDLE;
      endcase
    end
  end
endmodule
