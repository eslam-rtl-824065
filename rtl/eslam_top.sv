// eslam_top: the programmable-logic part of eSLAM.
//
// ORB-SLAM splits into feature extraction and matching, done here, and pose
// estimation, pose optimisation and map updating, done by the host processor.
// For each frame (frame_start) the top builds and processes a NLAYERS-layer
// image pyramid: while the ORB Extractor works on layer l, Image Resizing
// derives layer l+1 from the same layer by nearest-neighbour downsampling;
// the next layer starts when both are done. The extractor's heap then holds
// the best features of the whole pyramid; they are written to feat_base and
// handed to the BRIEF Matcher (fe_done). The matcher compares them with the
// n_map map descriptors at map_base and writes the matches to res_base
// (fm_done).
//
// Normal and key frames differ only in when matching may start. For a normal
// frame it starts right after extraction. For a key frame the host must first
// finish map updating, so the matcher waits for map_update_done (a pulse that
// may also come before extraction ends; it is remembered). This is the
// paper's frame pipeline; the handshake signals are this design's choice.
//
// Memory map: pyramid layer l lives at frame_base + l*PITCH*H_MAX, rows PITCH
// bytes apart; the host puts layer 0 there. The three units use three AXI
// master ports: 0 extractor, 1 resizer, 2 matcher.
module eslam_top
  import eslam_pkg::*;
#(
  parameter int unsigned W_MAX     = 640,
  parameter int unsigned H_MAX     = 480,
  parameter int unsigned PITCH     = 640,
  parameter int unsigned NLAYERS   = 4,
  parameter int          R         = 15,
  parameter int unsigned CAP       = 1024,
  parameter int unsigned KPQ_DEPTH = 512,
  parameter int unsigned MAP_MAX   = 1024,
  parameter int unsigned LANES     = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      frame_start,
  input  logic                      key_frame,
  input  logic                      map_update_done,
  input  logic [ADDR_W-1:0]         frame_base,
  input  logic [XW-1:0]             width,
  input  logic [YW-1:0]             height,
  input  logic [ADDR_W-1:0]         feat_base,
  input  logic [ADDR_W-1:0]         map_base,
  input  logic [$clog2(MAP_MAX):0]  n_map,
  input  logic [ADDR_W-1:0]         res_base,
  output logic                      busy,
  output logic                      fe_done,
  output logic                      fm_done,
  output logic                      waiting_map,
  output logic [$clog2(CAP):0]      n_feat,
  output logic [15:0]               n_kp,
  output logic [15:0]               kp_dropped,
  output logic [15:0]               heap_dropped,
  output axi_req_t                  axi_req [3],
  input  axi_rsp_t                  axi_rsp [3]
);
  localparam int unsigned LAYER_BYTES = PITCH * H_MAX;

  // ORB Extractor
  logic ex_clear, ex_start, ex_busy, ex_done, ex_drain, ex_drain_done, d_valid;
  logic [1:0] cur_layer;
  logic [ADDR_W-1:0] layer_base;
  logic [XW-1:0] lw;
  logic [YW-1:0] lh;
  logic [$clog2(CAP)-1:0] d_idx;
  logic [NBITS-1:0] d_desc;
  assign layer_base = frame_base + ADDR_W'(int'(cur_layer) * LAYER_BYTES);
  orb_extractor #(.W_MAX(W_MAX), .H_MAX(H_MAX), .PITCH(PITCH), .R(R), .CAP(CAP), .KPQ_DEPTH(KPQ_DEPTH)) u_ext (
    .clk, .rst_n, .clear(ex_clear), .start(ex_start), .layer(cur_layer), .base(layer_base),
    .width(lw), .height(lh), .busy(ex_busy), .done(ex_done), .drain(ex_drain), .feat_base,
    .drain_done(ex_drain_done), .n_feat, .desc_valid(d_valid), .desc_idx(d_idx), .desc(d_desc),
    .n_kp, .kp_dropped, .heap_dropped, .axi_req(axi_req[0]), .axi_rsp(axi_rsp[0]));

  // Image Resizing
  logic rs_start, rs_busy, rs_done;
  logic [XW-1:0] next_w;
  logic [YW-1:0] next_h;
  image_resizer #(.PITCH(PITCH)) u_rs (
    .clk, .rst_n, .start(rs_start), .src_base(layer_base), .dst_base(layer_base + ADDR_W'(LAYER_BYTES)),
    .src_w(lw), .src_h(lh), .dst_w(next_w), .dst_h(next_h), .busy(rs_busy), .done(rs_done),
    .axi_req(axi_req[1]), .axi_rsp(axi_rsp[1]));

  // BRIEF Matcher
  logic fm_start, fm_busy;
  logic [31:0] fm_cycles;
  brief_matcher #(.NA(CAP), .NB(MAP_MAX), .LANES(LANES)) u_fm (
    .clk, .rst_n, .desc_valid(d_valid), .desc_idx(d_idx), .desc(d_desc), .start(fm_start),
    .n_a(n_feat), .n_b(n_map), .map_base, .res_base, .busy(fm_busy), .done(fm_done),
    .compute_cycles(fm_cycles), .axi_req(axi_req[2]), .axi_rsp(axi_rsp[2]));

  // Frame controller
  typedef enum logic [2:0] {IDLE, LAYER, LWAIT, DRAIN, MWAIT, MATCH} st_t;
  st_t  st;
  logic kf, mu_seen, ex_ok, rs_ok;

  assign busy = (st != IDLE);
  assign waiting_map = (st == MWAIT);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= IDLE; kf <= 1'b0; mu_seen <= 1'b0; ex_ok <= 1'b0; rs_ok <= 1'b0;
      cur_layer <= '0; lw <= '0; lh <= '0;
      ex_clear <= 1'b0; ex_start <= 1'b0; ex_drain <= 1'b0; rs_start <= 1'b0; fm_start <= 1'b0;
      fe_done <= 1'b0;
    end else begin
      ex_clear <= 1'b0; ex_start <= 1'b0; ex_drain <= 1'b0; rs_start <= 1'b0; fm_start <= 1'b0;
      fe_done <= 1'b0;
      if (map_update_done) mu_seen <= 1'b1;
      unique case (st)
        IDLE: if (frame_start) begin
          kf <= key_frame;
          mu_seen <= map_update_done;
          cur_layer <= '0; lw <= width; lh <= height;
          ex_clear <= 1'b1;
          st <= LAYER;
        end
        LAYER: begin
          ex_start <= 1'b1;
          rs_start <= (int'(cur_layer) < int'(NLAYERS) - 1);
          ex_ok <= 1'b0;
          rs_ok <= !(int'(cur_layer) < int'(NLAYERS) - 1);
          st <= LWAIT;
        end
        LWAIT: begin
          if (ex_done) ex_ok <= 1'b1;
          if (rs_done) rs_ok <= 1'b1;
          if ((ex_ok || ex_done) && (rs_ok || rs_done)) begin
            if (int'(cur_layer) == int'(NLAYERS) - 1) begin
              ex_drain <= 1'b1;
              st <= DRAIN;
            end else begin
              cur_layer <= cur_layer + 1;
              lw <= next_w; lh <= next_h;
              st <= LAYER;
            end
          end
        end
        DRAIN: if (ex_drain_done) begin
          fe_done <= 1'b1;
          st <= MWAIT;
        end
        MWAIT: if (!kf || mu_seen) begin
          fm_start <= 1'b1;
          st <= MATCH;
        end
        MATCH: if (fm_done) st <= IDLE;
        default: st <= IDLE;
      endcase
    end
  end

  // A key frame's matching never starts before the host has updated the map.
  a_key_frame_waits: assert property (@(posedge clk) disable iff (!rst_n) fm_start |-> (!kf || mu_seen));
endmodule
