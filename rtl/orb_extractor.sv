// orb_extractor: the ORB Extractor, one pyramid layer per `start`.
//
// The layer (in SDRAM, row pitch PITCH, 8 pixels per 64-bit word) is handled
// in vertical strips of 8 columns. The Image Cache holds three strips: after
// two are pre-stored, each FSM state j streams strips j and j+1 while strip
// j+2 is fetched over AXI. Streaming runs one row period of 10 cycles per
// image row: the next row enters a 7-row x 16-column window register, and in
// each cycle one 7x7 patch (centre columns 8j+3 .. 8j+12) goes through
//   - FAST Detection (FAST-9 + Harris), whose score enters the Score Cache,
//   - the Image Smoother, whose output (centre columns 8j+4 .. 8j+11 only)
//     enters the Smoothened Image Cache.
// Two rows later the NMS walks the 8 centre columns of the Score Cache; the
// survivors away from the layer border become keypoints in a FIFO queue.
// This is the paper's rescheduled, streaming workflow (detect, describe,
// filter): a queued keypoint of smoothed strip s (columns 8s+4 .. 8s+11) is
// described once its radius-R disc, strips s-D .. s+D with D = ceil(R/8), has
// been smoothed. The Smoothened Image Cache holds 2D+2 strips, so while state
// j streams (smoothing strip j) the describe engine already works on strip
// j-D-1, and before state j+1 starts it must have finished that strip, whose
// oldest strip is the next to be overwritten. Orientation Computing (port A
// of the smoothed cache) and BRIEF Computing (port B) run together, the
// BRIEF Rotator steers the descriptor by the orientation label, and the
// feature {score, layer, y, x, descriptor} enters the Heap, which keeps the CAP best. After the last strip the rest
// of the queue is described and `done` pulses.
//
// `clear` empties the heap (new frame). `drain` writes the held features to
// feat_base (5 words each: descriptor words 0..3, then {score, layer, y, x}
// in bits 52:0) and hands each descriptor to the BRIEF Matcher on
// desc_valid/desc_idx/desc; drain_done pulses at the end, n_feat is the heap
// count. Keypoints are kept only if x and y lie in [R+4, size-5-R], so that
// every pixel their disc touches has been smoothed. Streaming and describing
// overlap as the paper asks, but describing one keypoint takes about 727
// cycles (one disc pixel per cycle), so when a strip has many keypoints the
// streamer waits for the describe engine; a full keypoint queue drops new
// keypoints (counted in kp_dropped). Both are this design's simplifications.
module orb_extractor
  import eslam_pkg::*;
#(
  parameter int unsigned W_MAX     = 640,
  parameter int unsigned H_MAX     = 480,
  parameter int unsigned PITCH     = 640,
  parameter int          R         = 15,
  parameter int unsigned CAP       = 1024,
  parameter int unsigned KPQ_DEPTH = 512,
  parameter int unsigned FAST_TH   = 20
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic                   start,
  input  logic [1:0]             layer,
  input  logic [ADDR_W-1:0]      base,
  input  logic [XW-1:0]          width,
  input  logic [YW-1:0]          height,
  output logic                   busy,
  output logic                   done,
  input  logic                   drain,
  input  logic [ADDR_W-1:0]      feat_base,
  output logic                   drain_done,
  output logic [$clog2(CAP):0]   n_feat,
  output logic                   desc_valid,
  output logic [$clog2(CAP)-1:0] desc_idx,
  output logic [NBITS-1:0]       desc,
  output logic [15:0]            n_kp,
  output logic [15:0]            kp_dropped,
  output logic [15:0]            heap_dropped,
  output axi_req_t               axi_req,
  input  axi_rsp_t               axi_rsp
);
  localparam int D = (R + 7) / 8;
  localparam int unsigned SLOTS = 2 * D + 2;
  localparam int unsigned HW = $clog2(H_MAX);
  localparam int unsigned CW = $clog2(CAP);
  localparam int KPW = SCORE_W + YW + XW;

  // ---------------- AXI interface ----------------
  logic m_rd_req, m_rd_valid, m_wr_req, m_wr_done, m_busy;
  logic [ADDR_W-1:0] m_rd_addr, m_wr_addr;
  logic [DATA_W-1:0] m_rd_data, m_wr_data;
  axi_master u_axi (.clk, .rst_n, .rd_req(m_rd_req), .rd_addr(m_rd_addr), .rd_valid(m_rd_valid),
                    .rd_data(m_rd_data), .wr_req(m_wr_req), .wr_addr(m_wr_addr), .wr_data(m_wr_data),
                    .wr_done(m_wr_done), .busy(m_busy), .axi_req, .axi_rsp);

  // ---------------- layer registers ----------------
  logic [ADDR_W-1:0] lbase;
  logic [XW-1:0]     lw;
  logic [YW-1:0]     lh;
  logic [1:0]        llayer;
  logic [XW-1:0]     nstrips;      // number of 8-column strips
  logic [XW-1:0]     j;            // current Image Cache state index
  assign nstrips = XW'((int'(lw) + 7) / 8);

  // ---------------- Image Cache and its fill engine ----------------
  logic         ic_init, ic_adv, ic_we;
  logic [HW-1:0] ic_wrow, ic_rrow;
  logic [63:0]  ic_wdata;
  logic [127:0] ic_rdata;
  logic [2:0]   ic_state;
  image_cache #(.H_MAX(H_MAX)) u_ic (.clk, .rst_n, .init(ic_init), .advance(ic_adv), .wr_en(ic_we),
    .wr_row(ic_wrow), .wr_data(ic_wdata), .rd_row(ic_rrow), .rd_data(ic_rdata), .state(ic_state));

  logic          fill_go, fill_busy, fill_wait;
  logic [XW-1:0] fill_strip;
  logic [YW-1:0] fill_row;

  // ---------------- streaming front end ----------------
  logic             st_go, st_act, st_done;
  logic [YW-1:0]    k;             // row period 0..height
  logic [3:0]       ph;            // phase 0..9 within the period
  logic [6:0][127:0] win;          // win[0] = oldest row
  patch_t           patch;
  logic             proc_v, nms_v;
  logic [XW-1:0]    cxg;           // global x of the processed centre
  logic [YW-1:0]    cyg;
  logic             fd_kp;
  logic [SCORE_W-1:0] fd_score;
  logic [7:0]       sm_pix;

  assign ic_rrow = HW'(k);
  assign proc_v = st_act && (k >= 7);
  assign nms_v = st_act && (k >= 10) && (ph <= 4'd7);
  assign cxg = XW'(int'(j) * 8 + 3 + int'(ph));
  assign cyg = YW'(int'(k) - 4);

  always_comb
    for (int r = 0; r < 7; r++)
      for (int c = 0; c < 7; c++)
        patch[r][c] = win[r][8 * (int'(ph) + c) +: 8];

  fast_detection #(.FAST_TH(FAST_TH)) u_fast (.patch, .is_kp(fd_kp), .score(fd_score));
  image_smoother u_smooth (.patch, .pix(sm_pix));

  logic [2:0][9:0][SCORE_W-1:0] sc_win;
  score_cache #(.NCOL(10), .NROW(4)) u_sc (.clk, .rst_n, .clear(st_go), .wr_en(proc_v),
    .wr_col(ph), .wr_score((cxg < lw) ? fd_score : '0), .row_next(proc_v && ph == 4'd9), .win(sc_win));

  logic [2:0][2:0][SCORE_W-1:0] nwin;
  logic nms_keep;
  always_comb
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < 3; c++)
        nwin[r][c] = sc_win[r][(int'(ph) + c) % 10];
  nms u_nms (.win(nwin), .keep(nms_keep));

  logic [XW-1:0] nx;
  logic [YW-1:0] ny;
  logic          in_border, kp_push;
  assign nx = XW'(int'(j) * 8 + 4 + int'(ph));
  assign ny = YW'(int'(k) - 6);
  assign in_border = (int'(nx) >= R + 4) && (int'(nx) <= int'(lw) - 5 - R) &&
                     (int'(ny) >= R + 4) && (int'(ny) <= int'(lh) - 5 - R);
  assign kp_push = nms_v && nms_keep && in_border;

  // ---------------- keypoint queue ----------------
  logic           q_pop, q_empty, q_full, q_clear;
  logic [KPW-1:0] q_head;
  sync_fifo #(.W(KPW), .DEPTH(KPQ_DEPTH)) u_kpq (.clk, .rst_n, .clear(q_clear), .push(kp_push),
    .din({nwin[1][1], ny, nx}), .pop(q_pop), .dout(q_head), .empty(q_empty), .full(q_full));
  logic [XW-1:0]      h_x;
  logic [YW-1:0]      h_y;
  logic [SCORE_W-1:0] h_s;
  assign {h_s, h_y, h_x} = q_head;

  // ---------------- Smoothened Image Cache ----------------
  logic [XW-1:0] oa_x, br_x;
  logic [YW-1:0] oa_y, br_y;
  logic [7:0]    oa_pix, br_pix;
  smoothed_image_cache #(.H_MAX(H_MAX), .SLOTS(SLOTS)) u_sic (.clk,
    .wr_en(proc_v && ph >= 4'd1 && ph <= 4'd8), .wr_x(cxg), .wr_y(cyg), .wr_pix(sm_pix),
    .ra_x(oa_x), .ra_y(oa_y), .ra_pix(oa_pix), .rb_x(br_x), .rb_y(br_y), .rb_pix(br_pix));

  // ---------------- describe: orientation, BRIEF, rotator ----------------
  logic          d_start, or_done, br_done, or_got, br_got;
  logic [4:0]    or_label, lab_q;
  logic [NBITS-1:0] br_desc, desc_q, rot_desc;
  logic [XW-1:0] d_x;
  logic [YW-1:0] d_y;
  logic [SCORE_W-1:0] d_s;
  orientation_computing #(.R(R)) u_or (.clk, .rst_n, .start(d_start), .kx(h_x), .ky(h_y),
    .rd_x(oa_x), .rd_y(oa_y), .rd_pix(oa_pix), .done(or_done), .label(or_label));
  brief_computing u_br (.clk, .rst_n, .start(d_start), .kx(h_x), .ky(h_y),
    .rd_x(br_x), .rd_y(br_y), .rd_pix(br_pix), .done(br_done), .desc(br_desc));
  brief_rotator u_rot (.desc_in(desc_q), .label(lab_q), .desc_out(rot_desc));

  // ---------------- Heap ----------------
  logic     h_in_valid, h_in_ready;
  feature_t h_in, h_rd;
  logic [CW-1:0] h_rd_idx;
  logic [CW:0]   h_count;
  assign h_in = '{score: d_s, layer: llayer, y: d_y, x: d_x, desc: rot_desc};
  feature_heap #(.CAP(CAP)) u_heap (.clk, .rst_n, .clear, .in_valid(h_in_valid), .in_ready(h_in_ready),
    .in_feat(h_in), .rd_idx(h_rd_idx), .rd_feat(h_rd), .count(h_count), .n_dropped(heap_dropped));
  assign n_feat = h_count;

  // ---------------- control ----------------
  typedef enum logic [3:0] {IDLE, PRE_A, PRE_B, RUN, DESC, LDONE, DR_RD, DR_WAIT, DR_WR, DR_WW, DR_NEXT} st_t;
  typedef enum logic [1:0] {DI, DW, DH} dst_t;
  st_t  st;
  dst_t dst;
  logic last_state, head_ok, head_run_ok;
  logic [2:0] dr_w;
  assign last_state = (int'(j) == int'(nstrips) - 2);
  // A keypoint of smoothed strip s reads strips s-D .. s+D. During state j
  // (strip j being smoothed into the slot of strip j-SLOTS) it may be
  // described once s+D <= j-1; it must be described before state j+1
  // overwrites strip j+1-SLOTS = s-D, i.e. by the end of state j as well.
  // Hence one condition for both phases, relaxed at the last state.
  assign head_run_ok = !q_empty && (int'(h_x - XW'(4)) / 8 + D + 1 <= int'(j));
  assign head_ok = !q_empty && (last_state || (int'(h_x - XW'(4)) / 8 + D + 1 <= int'(j)));
  assign busy = (st != IDLE);
  assign q_clear = (st == IDLE) && start;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= IDLE; dst <= DI; done <= 1'b0; drain_done <= 1'b0;
      lbase <= '0; lw <= '0; lh <= '0; llayer <= '0; j <= '0;
      ic_init <= 1'b0; ic_adv <= 1'b0; fill_go <= 1'b0; fill_strip <= '0; st_go <= 1'b0;
      d_start <= 1'b0; q_pop <= 1'b0; or_got <= 1'b0; br_got <= 1'b0; lab_q <= '0; desc_q <= '0;
      d_x <= '0; d_y <= '0; d_s <= '0; h_in_valid <= 1'b0;
      h_rd_idx <= '0; dr_w <= '0; desc_valid <= 1'b0; desc_idx <= '0; desc <= '0;
      m_wr_req <= 1'b0; m_wr_addr <= '0; m_wr_data <= '0;
      n_kp <= '0; kp_dropped <= '0;
    end else begin
      done <= 1'b0; drain_done <= 1'b0;
      ic_init <= 1'b0; ic_adv <= 1'b0; fill_go <= 1'b0; st_go <= 1'b0;
      d_start <= 1'b0; q_pop <= 1'b0; h_in_valid <= 1'b0; desc_valid <= 1'b0; m_wr_req <= 1'b0;
      if (clear) begin n_kp <= '0; kp_dropped <= '0; end
      else if (kp_push) begin
        if (q_full) kp_dropped <= kp_dropped + 1;
        else n_kp <= n_kp + 1;
      end

      // describe engine
      unique case (dst)
        DI: if (((st == DESC && head_ok) || (st == RUN && head_run_ok)) && !q_pop && !d_start) begin
          d_start <= 1'b1;
          q_pop <= 1'b1;
          d_x <= h_x; d_y <= h_y; d_s <= h_s;
          or_got <= 1'b0; br_got <= 1'b0;
          dst <= DW;
        end
        DW: begin
          if (or_done) begin or_got <= 1'b1; lab_q <= or_label; end
          if (br_done) begin br_got <= 1'b1; desc_q <= br_desc; end
          if ((or_got || or_done) && (br_got || br_done)) dst <= DH;
        end
        DH: if (h_in_ready && !h_in_valid) begin
          h_in_valid <= 1'b1;
          dst <= DI;
        end
        default: dst <= DI;
      endcase

      unique case (st)
        IDLE: begin
          if (start) begin
            lbase <= base; lw <= width; lh <= height; llayer <= layer; j <= '0;
            ic_init <= 1'b1;
            fill_go <= 1'b1; fill_strip <= '0;
            st <= PRE_A;
          end else if (drain) begin
            h_rd_idx <= '0;
            st <= (h_count == 0) ? DR_NEXT : DR_RD;
          end
        end
        PRE_A: if (!fill_go && !fill_busy) begin
          ic_adv <= 1'b1;
          fill_go <= 1'b1; fill_strip <= XW'(1);
          st <= PRE_B;
        end
        PRE_B: if (!fill_go && !fill_busy) begin
          ic_adv <= 1'b1;
          st_go <= 1'b1;
          if (nstrips > 2) begin fill_go <= 1'b1; fill_strip <= XW'(2); end
          st <= RUN;
        end
        RUN: if (!st_go && !st_act && !fill_go && !fill_busy) st <= DESC;
        DESC: if (dst == DI && !head_ok && !q_pop && !d_start && !h_in_valid) begin
          if (last_state) st <= LDONE;
          else begin
            ic_adv <= 1'b1;
            j <= j + 1;
            st_go <= 1'b1;
            if (int'(j) + 3 < int'(nstrips)) begin fill_go <= 1'b1; fill_strip <= j + XW'(3); end
            st <= RUN;
          end
        end
        LDONE: if (h_in_ready) begin done <= 1'b1; st <= IDLE; end
        // drain the heap to SDRAM and to the matcher
        DR_RD: begin dr_w <= '0; st <= DR_WAIT; end
        DR_WAIT: st <= DR_WR;
        DR_WR: if (!m_busy && !m_wr_req) begin
          m_wr_req <= 1'b1;
          m_wr_addr <= feat_base + ADDR_W'((int'(h_rd_idx) * 5 + int'(dr_w)) * 8);
          m_wr_data <= (dr_w == 3'd4) ? DATA_W'({h_rd.score, h_rd.layer, h_rd.y, h_rd.x})
                                      : h_rd.desc[64 * dr_w[1:0] +: 64];
          st <= DR_WW;
        end
        DR_WW: if (m_wr_done) begin
          if (dr_w == 3'd4) begin
            desc_valid <= 1'b1; desc_idx <= h_rd_idx; desc <= h_rd.desc;
            if (int'(h_rd_idx) == int'(h_count) - 1) st <= DR_NEXT;
            else begin h_rd_idx <= h_rd_idx + 1; st <= DR_RD; end
          end else begin
            dr_w <= dr_w + 1;
            st <= DR_WR;
          end
        end
        DR_NEXT: begin drain_done <= 1'b1; st <= IDLE; end
        default: st <= IDLE;
      endcase
    end
  end

  // fill engine: one strip, all rows of the layer
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      fill_busy <= 1'b0; fill_wait <= 1'b0; fill_row <= '0;
      m_rd_req <= 1'b0; m_rd_addr <= '0; ic_we <= 1'b0; ic_wrow <= '0; ic_wdata <= '0;
    end else begin
      m_rd_req <= 1'b0;
      ic_we <= 1'b0;
      if (fill_go) begin
        fill_busy <= 1'b1; fill_wait <= 1'b0; fill_row <= '0;
      end else if (fill_busy) begin
        if (!fill_wait && !m_busy && !m_rd_req) begin
          m_rd_req <= 1'b1;
          m_rd_addr <= lbase + ADDR_W'(int'(fill_row) * PITCH + int'(fill_strip) * 8);
          fill_wait <= 1'b1;
        end else if (fill_wait && m_rd_valid) begin
          ic_we <= 1'b1; ic_wrow <= HW'(fill_row); ic_wdata <= m_rd_data;
          fill_wait <= 1'b0;
          if (fill_row == lh - 1) fill_busy <= 1'b0;
          else fill_row <= fill_row + 1;
        end
      end
    end
  end

  // streaming engine: row periods of 10 cycles
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st_act <= 1'b0; st_done <= 1'b0; k <= '0; ph <= '0; win <= '0;
    end else begin
      st_done <= 1'b0;
      if (st_go) begin
        st_act <= 1'b1; k <= '0; ph <= '0;
      end else if (st_act) begin
        if (ph == 4'd9) begin
          ph <= '0;
          if (k < lh) win <= {ic_rdata, win[6:1]};
          if (k == lh) begin st_act <= 1'b0; st_done <= 1'b1; end
          else k <= k + 1;
        end else ph <= ph + 1;
      end
    end
  end

  // The AXI read port belongs to the fill engine, the write port to the drain.
  a_fill_only_when_streaming: assert property (@(posedge clk) disable iff (!rst_n)
    fill_busy |-> (st inside {PRE_A, PRE_B, RUN}));
endmodule
