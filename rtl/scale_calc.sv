// scale_calc: window sizes of the seven candidate scales.
//
// The tracker estimates scale the SAMF way: the sample window is cut at 7
// sizes a_n * s * (W, H), n = -3..3, where (W, H) is the window at scale
// factor 1, s the current scale factor and a_n a fixed table of relative
// factors {0.985, 0.990, 0.995, 1, 1.005, 1.010, 1.015} (SAMF's values; the
// paper gives only "7 scale factors"). Each window is later resampled to
// 128x128. Purely combinational.
//   base_w/base_h : window size at scale factor 1, whole pixels
//   cur_scale     : current scale factor, unsigned Q2.14 (16384 = 1.0)
//   win_w/win_h   : per-candidate window size, unsigned Q8.8 pixels,
//                   clamped to MAXWIN pixels so it fits the block buffer
//   cand_scale    : per-candidate scale factor a_n * s, Q2.14
module scale_calc
  import trk_pkg::*;
#(
  parameter int unsigned MAXWIN = 156  // largest window side, pixels
) (
  input  logic [7:0]  base_w,
  input  logic [7:0]  base_h,
  input  logic [15:0] cur_scale,
  output logic [NSCALE-1:0][15:0] win_w,
  output logic [NSCALE-1:0][15:0] win_h,
  output logic [NSCALE-1:0][15:0] cand_scale
);
  // a_n in Q0.16 (65536 = 1.0), n = -3..3
  localparam logic [16:0] A_T [NSCALE] = '{
    17'd64553, 17'd64881, 17'd65208, 17'd65536, 17'd65864, 17'd66191, 17'd66519};
  localparam logic [31:0] MAXQ = 32'(MAXWIN) << 8;

  always_comb begin
    for (int n = 0; n < NSCALE; n++) begin
      logic [32:0] s;
      logic [40:0] w, h;
      s = 33'(cur_scale) * 33'(A_T[n]);          // Q.30
      cand_scale[n] = (s >> 16) > 33'hFFFF ? 16'hFFFF : 16'(s >> 16);
      w = (41'(base_w) * 41'(s)) >> 22;          // Q.8
      h = (41'(base_h) * 41'(s)) >> 22;
      win_w[n] = (w > 41'(MAXQ)) ? 16'(MAXQ) : 16'(w);
      win_h[n] = (h > 41'(MAXQ)) ? 16'(MAXQ) : 16'(h);
    end
  end
endmodule
