// target_update: new target position and scale from the response peaks.
//
// Position: the peak (py, px) of the position response of the centre scale
// is a circular displacement in cells; values >= 16 are negative. One cell
// is 4 of the 128 sample pixels, i.e. win/32 frame pixels for a window of
// win pixels, so dx = round(sdx * win_w / 32) (likewise dy), and the centre
// moves by (dx, dy), kept inside the frame.
// Scale: the candidate whose scale response has the highest peak gives the
// new scale factor, kept within [SMIN, SMAX].
// init (pulse) loads a starting centre and scale 1.0; update (pulse) applies
// the peaks; the new state is visible the next cycle. best_n tells which
// scale won (3 = unchanged).
module target_update
  import trk_pkg::*;
#(
  parameter int unsigned FRAME_W = 1280,
  parameter int unsigned FRAME_H = 720,
  parameter logic [15:0] SMIN = 16'd4096,    // 0.25 in Q2.14
  parameter logic [15:0] SMAX = 16'd49152,   // 3.0 in Q2.14
  localparam int unsigned XB = $clog2(FRAME_W),
  localparam int unsigned YB = $clog2(FRAME_H)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          init,
  input  logic [XB-1:0] init_cx,
  input  logic [YB-1:0] init_cy,
  input  logic          update,
  input  logic [9:0]    pos_peak_idx,
  input  logic [NSCALE-1:0][DW-1:0] scale_peak,
  input  logic [NSCALE-1:0][15:0]   cand_scale,
  input  logic [15:0]   win_w,      // centre-scale window, Q8.8
  input  logic [15:0]   win_h,
  output logic [XB-1:0] cx,
  output logic [YB-1:0] cy,
  output logic [15:0]   scale,
  output logic [2:0]    best_n
);
  logic signed [5:0]  sdx, sdy;
  logic signed [23:0] mx, my;
  logic signed [15:0] dx, dy;
  logic signed [XB+1:0] nx;
  logic signed [YB+1:0] ny;
  logic [2:0]  bn;
  logic [15:0] ns;

  always_comb begin
    sdx = pos_peak_idx[4] ? $signed({1'b1, pos_peak_idx[4:0]}) : $signed({1'b0, pos_peak_idx[4:0]});
    sdy = pos_peak_idx[9] ? $signed({1'b1, pos_peak_idx[9:5]}) : $signed({1'b0, pos_peak_idx[9:5]});
    mx  = 24'(sdx) * $signed({8'b0, win_w});        // cells * Q8.8
    my  = 24'(sdy) * $signed({8'b0, win_h});
    dx  = 16'((mx + 24'sd4096) >>> 13);             // / 32 / 256, rounded
    dy  = 16'((my + 24'sd4096) >>> 13);
    nx  = $signed({2'b0, cx}) + (XB+2)'(dx);
    ny  = $signed({2'b0, cy}) + (YB+2)'(dy);
    if (nx < 0) nx = 0;
    if (nx > (XB+2)'(FRAME_W - 1)) nx = (XB+2)'(FRAME_W - 1);
    if (ny < 0) ny = 0;
    if (ny > (YB+2)'(FRAME_H - 1)) ny = (YB+2)'(FRAME_H - 1);
    bn = 3'd3;
    for (int n = 0; n < NSCALE; n++)
      if ($signed(scale_peak[n]) > $signed(scale_peak[bn])) bn = 3'(n);
    ns = cand_scale[bn];
    if (ns < SMIN) ns = SMIN;
    if (ns > SMAX) ns = SMAX;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cx <= '0; cy <= '0; scale <= 16'd16384; best_n <= 3'd3;
    end else if (init) begin
      cx <= init_cx; cy <= init_cy; scale <= 16'd16384; best_n <= 3'd3;
    end else if (update) begin
      cx <= XB'(nx); cy <= YB'(ny); scale <= ns; best_n <= bn;
    end
  end
endmodule
