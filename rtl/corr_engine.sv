// corr_engine: batch-processed correlation filter, training and detection.
//
// Implements the DSST filter of the paper in the frequency domain:
//   A^l_t = (1-eta) A^l_{t-1} + eta conj(G) F^l                  (model numerator)
//   B_t   = (1-eta) B_{t-1}   + eta sum_k conj(F^k) F^k         (model denominator)
//   y     = IFFT2( sum_l conj(A^l) Z^l / (B + lambda) )         (response)
// The 33 feature channels are processed in 8 batches (paper Fig. 2): batch 0
// carries grey + HOG 0-3, batches 1..7 carry four HOG channels each. Five
// fft2d lanes transform one batch in parallel; their outputs leave in lock
// step, so one frequency bin of all lanes is handled per cycle: the model
// numerator of each lane's channel is read, updated (TRAIN) or multiplied
// into the running numerator sum (DETECT). After the last batch, DETECT
// forms two spectra, position (all 33 channels) and scale (32 HOG channels),
// scales them by stored reciprocals of (B + lambda) and runs them through
// lanes 0 and 1 of the same FFT hardware in inverse mode. TRAIN instead
// updates B and recomputes the two reciprocals with two serial dividers.
// GAUSS transforms the Gaussian label g once (lane 0) and keeps G.
// Commands: cmd_start (pulse, when !busy), cmd_mode, cmd_first (TRAIN with
// eta = 1, i.e. model initialisation). Feature map: feat_raddr / feat_rdata,
// combinational read. Responses: resp_valid with resp_idx = y*32 + x and
// the real parts of both inverse transforms. done pulses at the end.
// Timing: about 8 x 9.4k cycles for the batches, then ~9.4k (DETECT) or
// ~52k (TRAIN, 1024 reciprocals of 49 clocks) cycles.
// Number formats, eta, lambda and the split into position and scale spectra
// (which share the HOG numerators) are this design's choices.
module corr_engine
  import trk_pkg::*;
#(
  parameter logic [16:0] ETA    = 17'd1638,  // learning rate, Q.16 (0.025)
  parameter logic [BW-1:0] LAMBDA = 40'd16,  // regulariser, in B units
  parameter int unsigned YSH    = 2          // extra right shift of the response spectrum
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       cmd_start,
  input  eng_mode_e  cmd_mode,
  input  logic       cmd_first,
  output logic [9:0] feat_raddr,
  input  feat_word_t feat_rdata,
  output logic       resp_valid,
  output logic [9:0] resp_idx,
  output logic signed [DW-1:0] resp_pos,
  output logic signed [DW-1:0] resp_scale,
  output logic       busy,
  output logic       done
);
  typedef enum logic [2:0] {S_IDLE, S_GAUSS, S_BSTART, S_BATCH, S_ISTART, S_INV, S_RECIP, S_DONE} state_e;
  state_e    state;
  eng_mode_e mode;
  logic      first;
  logic [2:0] b;          // batch
  logic [10:0] fa;        // feed address
  logic [10:0] k_r;       // reciprocal index

  // ---------------- FFT lanes ----------------
  logic  l_start [LANES];
  logic  l_inverse;
  logic  l_in_valid [LANES];
  cplx_t l_in_data  [LANES];
  logic  l_in_ready [LANES];
  logic  l_out_valid[LANES];
  cplx_t l_out_data [LANES];
  logic [9:0] l_out_idx [LANES];
  logic  l_done [LANES];
  logic  l_busy [LANES];

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    fft2d u_fft (
      .clk, .rst_n, .start(l_start[l]), .inverse(l_inverse),
      .in_valid(l_in_valid[l]), .in_data(l_in_data[l]), .in_ready(l_in_ready[l]),
      .out_valid(l_out_valid[l]), .out_data(l_out_data[l]), .out_idx(l_out_idx[l]),
      .done(l_done[l]), .busy(l_busy[l]));
  end

  // ---------------- Gaussian label ----------------
  logic  g_start, g_valid;
  cplx_t g_data;
  gauss_gen u_gauss (.clk, .rst_n, .start(g_start), .out_valid(g_valid),
                     .out_ready(l_in_ready[0]), .out_data(g_data));

  // ---------------- memories ----------------
  cplx_t              gmem  [MAPSZ];                 // G
  acplx_t             amem  [LANES][NBATCH*MAPSZ];   // A^l, lane-major
  logic signed [NUMW-1:0] nh_re [MAPSZ], nh_im [MAPSZ];  // HOG numerator sum
  logic signed [NUMW-1:0] ng_re [MAPSZ], ng_im [MAPSZ];  // grey numerator
  logic [BW-1:0]      bh [MAPSZ], bg [MAPSZ], eh [MAPSZ];
  logic [RW-1:0]      rpos [MAPSZ], rsc [MAPSZ];

  // ---------------- feeding ----------------
  assign feat_raddr = fa[9:0];
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      l_in_valid[l] = 1'b0;
      l_in_data[l]  = '0;
    end
    for (int l = 0; l < LANES; l++)
      l_start[l] = (state == S_BSTART) || (state == S_ISTART && l < 2);
    l_inverse = (state == S_ISTART);
    g_start   = 1'b0;
    unique case (state)
      S_GAUSS: begin
        l_in_valid[0] = g_valid;
        l_in_data[0]  = g_data;
      end
      S_BATCH: begin
        for (int l = 0; l < LANES; l++) begin
          l_in_valid[l] = !fa[10];
          l_in_data[l].re = DW'(feat_rdata[batch_channel(32'(b), l)]) <<< 8;
          l_in_data[l].im = '0;
        end
      end
      S_INV: begin
        logic signed [NUMW+RW:0] yp_re, yp_im, ys_re, ys_im;
        logic signed [NUMW:0] np_re, np_im;
        np_re = (NUMW+1)'(nh_re[fa[9:0]]) + (NUMW+1)'(ng_re[fa[9:0]]);
        np_im = (NUMW+1)'(nh_im[fa[9:0]]) + (NUMW+1)'(ng_im[fa[9:0]]);
        yp_re = ((NUMW+RW+1)'(np_re) * $signed({1'b0, rpos[fa[9:0]]})) >>> (RS + YSH);
        yp_im = ((NUMW+RW+1)'(np_im) * $signed({1'b0, rpos[fa[9:0]]})) >>> (RS + YSH);
        ys_re = ((NUMW+RW+1)'(nh_re[fa[9:0]]) * $signed({1'b0, rsc[fa[9:0]]})) >>> (RS + YSH);
        ys_im = ((NUMW+RW+1)'(nh_im[fa[9:0]]) * $signed({1'b0, rsc[fa[9:0]]})) >>> (RS + YSH);
        l_in_valid[0] = !fa[10];
        l_in_valid[1] = !fa[10];
        l_in_data[0].re = sat_dw(yp_re);
        l_in_data[0].im = sat_dw(yp_im);
        l_in_data[1].re = sat_dw(ys_re);
        l_in_data[1].im = sat_dw(ys_im);
      end
      default: ;
    endcase
    if (state == S_IDLE && cmd_start && cmd_mode == ENG_GAUSS) g_start = 1'b1;
    if (state == S_IDLE && cmd_start && cmd_mode == ENG_GAUSS) l_start[0] = 1'b1;
  end

  function automatic logic signed [DW-1:0] sat_dw(logic signed [NUMW+RW:0] v);
    if (v > (NUMW+RW+1)'((1 <<< (DW - 1)) - 1))  return DW'((1 <<< (DW - 1)) - 1);
    if (v < -(NUMW+RW+1)'(1 <<< (DW - 1)))       return DW'(-(1 <<< (DW - 1)));
    return DW'(v);
  endfunction

  // ---------------- per-bin arithmetic of a batch ----------------
  logic [9:0] kk;
  logic [12:0] aaddr;
  assign kk    = l_out_idx[0];
  assign aaddr = {b, kk};

  acplx_t a_new [LANES];
  logic signed [NUMW-1:0] sum_re, sum_im, g0_re, g0_im;
  logic [BW-1:0] e_hog, e_gray;
  always_comb begin
    sum_re = '0; sum_im = '0; g0_re = '0; g0_im = '0; e_hog = '0; e_gray = '0;
    for (int l = 0; l < LANES; l++) begin
      logic signed [AW+DW:0]   p_re, p_im;
      logic signed [2*DW:0]    n_re, n_im;
      logic signed [AW:0]      d_re, d_im;
      logic signed [AW+18:0]   u_re, u_im;
      logic [2*DW:0]           en;
      acplx_t a;
      cplx_t  f, g;
      a = amem[l][aaddr];
      f = l_out_data[l];
      g = gmem[kk];
      // conj(A) * F
      p_re = (AW+DW+1)'(a.re) * (AW+DW+1)'(f.re) + (AW+DW+1)'(a.im) * (AW+DW+1)'(f.im);
      p_im = (AW+DW+1)'(a.re) * (AW+DW+1)'(f.im) - (AW+DW+1)'(a.im) * (AW+DW+1)'(f.re);
      // conj(G) * F >> 8
      n_re = ((2*DW+1)'(g.re) * (2*DW+1)'(f.re) + (2*DW+1)'(g.im) * (2*DW+1)'(f.im)) >>> 8;
      n_im = ((2*DW+1)'(g.re) * (2*DW+1)'(f.im) - (2*DW+1)'(g.im) * (2*DW+1)'(f.re)) >>> 8;
      // |F|^2 >> 16
      en = ((2*DW+1)'($signed(f.re) * $signed(f.re)) + (2*DW+1)'($signed(f.im) * $signed(f.im))) >> 16;
      // A + eta (N - A)
      d_re = (AW+1)'(n_re) - (AW+1)'(a.re);
      d_im = (AW+1)'(n_im) - (AW+1)'(a.im);
      u_re = ((AW+19)'(d_re) * (AW+19)'($signed({1'b0, ETA}))) >>> 16;
      u_im = ((AW+19)'(d_im) * (AW+19)'($signed({1'b0, ETA}))) >>> 16;
      if (first) begin
        a_new[l].re = AW'(n_re);
        a_new[l].im = AW'(n_im);
      end else begin
        a_new[l].re = a.re + AW'(u_re);
        a_new[l].im = a.im + AW'(u_im);
      end
      if (batch_lane_used(32'(b), l)) begin
        if (b == 3'd0 && l == 0) begin
          g0_re = NUMW'(p_re); g0_im = NUMW'(p_im); e_gray = BW'(en);
        end else begin
          sum_re += NUMW'(p_re); sum_im += NUMW'(p_im); e_hog += BW'(en);
        end
      end
    end
  end

  function automatic logic [BW-1:0] blend(logic [BW-1:0] old, logic [BW-1:0] nw, logic fst);
    logic signed [BW+18:0] d;
    if (fst) return nw;
    d = ((BW+19)'($signed({1'b0, nw})) - (BW+19)'($signed({1'b0, old}))) * (BW+19)'($signed({1'b0, ETA}));
    return old + BW'(d >>> 16);
  endfunction

  logic bin_v;
  assign bin_v = (state == S_BATCH) && l_out_valid[0];

  always_ff @(posedge clk) begin
    if (state == S_GAUSS && l_out_valid[0]) gmem[l_out_idx[0]] <= l_out_data[0];
    if (bin_v) begin
      if (mode == ENG_TRAIN) begin
        for (int l = 0; l < LANES; l++)
          if (batch_lane_used(32'(b), l)) amem[l][aaddr] <= a_new[l];
        if (b == 3'd0) begin
          eh[kk] <= e_hog;
          bg[kk] <= blend(bg[kk], e_gray, first);
        end else if (b == 3'd7) begin
          bh[kk] <= blend(bh[kk], eh[kk] + e_hog, first);
        end else begin
          eh[kk] <= eh[kk] + e_hog;
        end
      end else begin
        if (b == 3'd0) begin
          nh_re[kk] <= sum_re; nh_im[kk] <= sum_im;
          ng_re[kk] <= g0_re;  ng_im[kk] <= g0_im;
        end else begin
          nh_re[kk] <= nh_re[kk] + sum_re; nh_im[kk] <= nh_im[kk] + sum_im;
        end
      end
    end
  end

  // ---------------- reciprocals ----------------
  logic d_start, d0_done, d1_done, d0_busy, d1_busy;
  logic [RW-1:0] q0, q1;
  logic [BW-1:0] den_pos, den_sc;
  assign den_pos = bh[k_r[9:0]] + bg[k_r[9:0]] + LAMBDA;
  assign den_sc  = bh[k_r[9:0]] + LAMBDA;
  recip_div #(.DWID(BW), .RS(RS), .QW(RW)) u_div0 (.clk, .rst_n, .start(d_start), .d(den_pos),
    .q(q0), .busy(d0_busy), .done(d0_done));
  recip_div #(.DWID(BW), .RS(RS), .QW(RW)) u_div1 (.clk, .rst_n, .start(d_start), .d(den_sc),
    .q(q1), .busy(d1_busy), .done(d1_done));
  logic r_wait;
  assign d_start = (state == S_RECIP) && !r_wait && !k_r[10];

  always_ff @(posedge clk) begin
    if (d0_done) begin
      rpos[k_r[9:0]] <= q0;
      rsc[k_r[9:0]]  <= q1;
    end
  end

  // ---------------- responses ----------------
  assign resp_valid = (state == S_INV) && l_out_valid[0];
  assign resp_idx   = l_out_idx[0];
  assign resp_pos   = l_out_data[0].re;
  assign resp_scale = l_out_data[1].re;
  assign busy       = (state != S_IDLE);

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; mode <= ENG_GAUSS; first <= 1'b0; b <= '0; fa <= '0;
      k_r <= '0; r_wait <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (cmd_start) begin
          mode  <= cmd_mode;
          first <= cmd_first;
          b     <= '0;
          state <= (cmd_mode == ENG_GAUSS) ? S_GAUSS : S_BSTART;
        end
        S_GAUSS: if (l_done[0]) state <= S_DONE;
        S_BSTART: begin
          fa    <= '0;
          state <= S_BATCH;
        end
        S_BATCH: begin
          if (!fa[10] && l_in_ready[0]) fa <= fa + 11'd1;
          if (l_done[0]) begin
            if (b != 3'd7) begin
              b     <= b + 3'd1;
              state <= S_BSTART;
            end else if (mode == ENG_DETECT) begin
              state <= S_ISTART;
            end else begin
              k_r    <= '0;
              r_wait <= 1'b0;
              state  <= S_RECIP;
            end
          end
        end
        S_ISTART: begin
          fa    <= '0;
          state <= S_INV;
        end
        S_INV: begin
          if (!fa[10] && l_in_ready[0]) fa <= fa + 11'd1;
          if (l_done[0]) state <= S_DONE;
        end
        S_RECIP: begin
          if (d_start) r_wait <= 1'b1;
          if (d0_done) begin
            r_wait <= 1'b0;
            k_r    <= k_r + 11'd1;
            if (k_r == 11'd1023) state <= S_DONE;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // lanes fed together must deliver together
  a_lanes_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_BATCH || state == S_INV) |-> l_out_valid[0] == l_out_valid[1]);
endmodule
