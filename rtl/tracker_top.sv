// tracker_top: the complete correlation-filter visual tracker.
//
// Data path (one frame): the grey pixel stream passes through box_overlay
// to the video output; when armed, block_extract keeps the BLK x BLK square
// around the target. For each of the 7 candidate scales (scale_calc),
// interp_bilinear resamples that scale's window to 128x128 (+ border ring),
// hog_feat turns it into the 32x32x33 feature map, and corr_engine
// correlates it with the learned filter in 8 batches of 5 lanes and
// returns the position and scale responses; peak_find instances keep the
// peaks. The centre scale is processed last, so its features are still in
// the map when the filter is updated from them (TRAIN) after target_update
// has moved the target. The first frame after `init` only trains (eta = 1).
// At reset the Gaussian label is transformed once (GAUSS) before any frame.
// Frames that arrive while the previous one is still being processed are
// passed to the output but not tracked.
// Interface: pix_valid/sof/pix in, out_valid/out_sof/out_pix out; init with
// the starting centre, the search window at scale 1 (2.5x the target in
// the usual DSST set-up) and the box size; tgt_* and frame_done report.
module tracker_top
  import trk_pkg::*;
#(
  parameter int unsigned FRAME_W = 1280,
  parameter int unsigned FRAME_H = 720,
  parameter int unsigned BLK     = 160,
  localparam int unsigned XB = $clog2(FRAME_W),
  localparam int unsigned YB = $clog2(FRAME_H),
  localparam int unsigned AB = $clog2(BLK * BLK)
) (
  input  logic          clk,
  input  logic          rst_n,
  // start tracking
  input  logic          init,
  input  logic [XB-1:0] init_cx,
  input  logic [YB-1:0] init_cy,
  input  logic [7:0]    init_win_w,   // search window at scale 1, pixels
  input  logic [7:0]    init_win_h,
  input  logic [XB-1:0] init_box_w,   // drawn box at scale 1, pixels
  input  logic [YB-1:0] init_box_h,
  // video in (already preprocessed grey)
  input  logic          pix_valid,
  input  logic          sof,
  input  logic [PW-1:0] pix,
  // video out with the box
  output logic          out_valid,
  output logic          out_sof,
  output logic [PW-1:0] out_pix,
  // target state
  output logic [XB-1:0] tgt_cx,
  output logic [YB-1:0] tgt_cy,
  output logic [15:0]   tgt_scale,
  output logic [2:0]    tgt_best_n,
  output logic          frame_done,
  output logic          ready         // Gaussian label prepared
);
  typedef enum logic [3:0] {
    T_GAUSS, T_GWAIT, T_IDLE, T_ARM, T_CAPT, T_SAMPLE, T_FEAT, T_DET, T_DWAIT,
    T_UPDATE, T_TRAIN, T_TWAIT, T_NEXT
  } tstate_e;
  tstate_e st;

  logic       first;
  logic [2:0] si;        // position in the scale order
  logic [2:0] n_cur;
  logic [7:0] win_w0, win_h0;
  logic [XB-1:0] box_w0;
  logic [YB-1:0] box_h0;

  // scale order: 0,1,2,4,5,6 then the centre 3 last; the first frame uses 3 only
  always_comb begin
    if (first || si == 3'd6) n_cur = 3'd3;
    else if (si < 3'd3)      n_cur = si;
    else                     n_cur = si + 3'd1;
  end

  // ---------------- scale information ----------------
  logic [NSCALE-1:0][15:0] win_w, win_h, cand_scale;
  scale_calc #(.MAXWIN(BLK - 4)) u_scale (
    .base_w(win_w0), .base_h(win_h0), .cur_scale(tgt_scale),
    .win_w, .win_h, .cand_scale);

  // ---------------- block extraction ----------------
  logic          arm, cap_done, capturing;
  logic [7:0]    blk_cx, blk_cy;
  logic [AB-1:0] b_raddr;
  logic [PW-1:0] b_rdata;
  assign arm = (st == T_ARM);
  block_extract #(.FRAME_W(FRAME_W), .FRAME_H(FRAME_H), .BLK(BLK)) u_blk (
    .clk, .rst_n, .arm, .cx(tgt_cx), .cy(tgt_cy),
    .pix_valid, .sof, .pix, .capturing, .done(cap_done),
    .blk_cx, .blk_cy, .rd_addr(b_raddr), .rd_data(b_rdata));

  // ---------------- interpolation and features ----------------
  logic          i_start, i_valid, i_done, i_busy;
  logic [PW-1:0] i_pix;
  assign i_start = (st == T_SAMPLE);
  interp_bilinear #(.BLK(BLK)) u_interp (
    .clk, .rst_n, .start(i_start), .win_w(win_w[n_cur]), .win_h(win_h[n_cur]),
    .cx(blk_cx), .cy(blk_cy), .rd_addr(b_raddr), .rd_data(b_rdata),
    .out_valid(i_valid), .out_pix(i_pix), .done(i_done), .busy(i_busy));

  logic       f_we, f_done;
  logic [9:0] f_waddr, f_raddr;
  feat_word_t f_wdata, f_rdata;
  hog_feat u_hog (
    .clk, .rst_n, .start(i_start), .in_valid(i_valid), .in_pix(i_pix),
    .feat_we(f_we), .feat_addr(f_waddr), .feat_data(f_wdata), .done(f_done));

  sdp_ram #(.WIDTH(NCH * FW), .DEPTH(MAPSZ)) u_featmap (
    .clk, .we(f_we), .waddr(f_waddr), .wdata(f_wdata), .raddr(f_raddr), .rdata(f_rdata));

  // ---------------- correlation filter ----------------
  logic      e_start, e_first, e_busy, e_done, r_valid;
  eng_mode_e e_mode;
  logic [9:0] r_idx;
  logic signed [DW-1:0] r_pos, r_sc;
  always_comb begin
    e_start = 1'b0;
    e_mode  = ENG_DETECT;
    e_first = 1'b0;
    unique case (st)
      T_GAUSS: begin e_start = 1'b1; e_mode = ENG_GAUSS; end
      T_DET:   begin e_start = 1'b1; e_mode = ENG_DETECT; end
      T_TRAIN: begin e_start = 1'b1; e_mode = ENG_TRAIN; e_first = first; end
      default: ;
    endcase
  end
  corr_engine u_eng (
    .clk, .rst_n, .cmd_start(e_start), .cmd_mode(e_mode), .cmd_first(e_first),
    .feat_raddr(f_raddr), .feat_rdata(f_rdata),
    .resp_valid(r_valid), .resp_idx(r_idx), .resp_pos(r_pos), .resp_scale(r_sc),
    .busy(e_busy), .done(e_done));

  // ---------------- peaks ----------------
  logic pk_clear;
  logic signed [DW-1:0] pp_val, ps_val;
  logic [9:0] pp_idx, ps_idx;
  logic pp_found, ps_found;
  assign pk_clear = (st == T_DET);
  peak_find u_pk_pos (.clk, .rst_n, .clear(pk_clear), .in_valid(r_valid), .in_idx(r_idx),
    .in_val(r_pos), .peak_val(pp_val), .peak_idx(pp_idx), .found(pp_found));
  peak_find u_pk_sc (.clk, .rst_n, .clear(pk_clear), .in_valid(r_valid), .in_idx(r_idx),
    .in_val(r_sc), .peak_val(ps_val), .peak_idx(ps_idx), .found(ps_found));

  logic [NSCALE-1:0][DW-1:0] sc_peak;
  logic [9:0] pos_idx;

  // ---------------- target information ----------------
  target_update #(.FRAME_W(FRAME_W), .FRAME_H(FRAME_H)) u_tgt (
    .clk, .rst_n, .init, .init_cx, .init_cy, .update(st == T_UPDATE),
    .pos_peak_idx(pos_idx), .scale_peak(sc_peak), .cand_scale,
    .win_w(win_w[3]), .win_h(win_h[3]),
    .cx(tgt_cx), .cy(tgt_cy), .scale(tgt_scale), .best_n(tgt_best_n));

  // ---------------- overlay ----------------
  logic [XB+15:0] bw_s;
  logic [YB+15:0] bh_s;
  assign bw_s = (XB+16)'(box_w0) * (XB+16)'(tgt_scale);
  assign bh_s = (YB+16)'(box_h0) * (YB+16)'(tgt_scale);
  box_overlay #(.FRAME_W(FRAME_W), .FRAME_H(FRAME_H)) u_ovl (
    .clk, .rst_n, .cx(tgt_cx), .cy(tgt_cy), .w(XB'(bw_s >> 14)), .h(YB'(bh_s >> 14)),
    .in_valid(pix_valid), .in_sof(sof), .in_pix(pix),
    .out_valid, .out_sof, .out_pix);

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_GAUSS; first <= 1'b1; si <= '0; ready <= 1'b0; frame_done <= 1'b0;
      win_w0 <= 8'd1; win_h0 <= 8'd1; box_w0 <= '0; box_h0 <= '0;
      sc_peak <= '0; pos_idx <= '0;
    end else begin
      frame_done <= 1'b0;
      if (init && st != T_GAUSS && st != T_GWAIT) begin
        first  <= 1'b1;
        win_w0 <= init_win_w; win_h0 <= init_win_h;
        box_w0 <= init_box_w; box_h0 <= init_box_h;
      end
      unique case (st)
        T_GAUSS: st <= T_GWAIT;
        T_GWAIT: if (e_done) begin ready <= 1'b1; st <= T_IDLE; end
        T_IDLE:  if (init) st <= T_ARM;
        T_ARM:   if (pix_valid && sof) st <= T_CAPT;
        T_CAPT:  if (cap_done) begin si <= '0; st <= T_SAMPLE; end
        T_SAMPLE: st <= T_FEAT;
        T_FEAT:  if (f_done) st <= first ? T_TRAIN : T_DET;
        T_DET:   st <= T_DWAIT;
        T_DWAIT: if (e_done) begin
          sc_peak[n_cur] <= ps_val;
          if (n_cur == 3'd3) pos_idx <= pp_idx;
          if (si == 3'd6) st <= T_UPDATE;
          else begin si <= si + 3'd1; st <= T_SAMPLE; end
        end
        T_UPDATE: st <= T_TRAIN;
        T_TRAIN:  st <= T_TWAIT;
        T_TWAIT:  if (e_done) st <= T_NEXT;
        T_NEXT: begin
          first      <= 1'b0;
          frame_done <= 1'b1;
          st         <= T_ARM;
        end
        default: st <= T_IDLE;
      endcase
    end
  end
endmodule
