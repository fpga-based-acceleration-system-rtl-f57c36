// box_overlay: draws the tracking box into the outgoing video.
//
// The pixel stream passes through with one cycle of latency; pixels on the
// THICK-pixel outline of the box centred at (cx, cy) with size (w, h) are
// replaced by the value BOX_VAL (white). The box is sampled at the start
// of each frame (sof) so it does not change mid-frame. The outline style is
// this design's choice; the paper only shows the boxes on the video.
module box_overlay
  import trk_pkg::*;
#(
  parameter int unsigned FRAME_W = 1280,
  parameter int unsigned FRAME_H = 720,
  parameter int unsigned THICK   = 2,
  parameter logic [PW-1:0] BOX_VAL = 8'hFF,
  localparam int unsigned XB = $clog2(FRAME_W),
  localparam int unsigned YB = $clog2(FRAME_H)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [XB-1:0] cx,
  input  logic [YB-1:0] cy,
  input  logic [XB-1:0] w,
  input  logic [YB-1:0] h,
  input  logic          in_valid,
  input  logic          in_sof,
  input  logic [PW-1:0] in_pix,
  output logic          out_valid,
  output logic          out_sof,
  output logic [PW-1:0] out_pix
);
  logic [XB-1:0] x, xc;
  logic [YB-1:0] y, yc;
  logic signed [XB+1:0] l_q, r_q, l_n, r_n, l_e, r_e;
  logic signed [YB+1:0] t_q, b_q, t_n, b_n, t_e, b_e;
  logic on_v, on_h, inside_x, inside_y;

  assign xc  = in_sof ? '0 : x;
  assign yc  = in_sof ? '0 : y;
  assign l_n = $signed({2'b0, cx}) - $signed({3'b0, w[XB-1:1]});
  assign r_n = l_n + $signed({2'b0, w}) - 1;
  assign t_n = $signed({2'b0, cy}) - $signed({3'b0, h[YB-1:1]});
  assign b_n = t_n + $signed({2'b0, h}) - 1;
  assign l_e = in_sof ? l_n : l_q;
  assign r_e = in_sof ? r_n : r_q;
  assign t_e = in_sof ? t_n : t_q;
  assign b_e = in_sof ? b_n : b_q;

  always_comb begin
    logic signed [XB+1:0] sx;
    logic signed [YB+1:0] sy;
    sx = $signed({2'b0, xc});
    sy = $signed({2'b0, yc});
    inside_x = (sx >= l_e) && (sx <= r_e);
    inside_y = (sy >= t_e) && (sy <= b_e);
    on_v = inside_y && ((sx >= l_e && sx < l_e + $signed((XB+2)'(THICK))) || (sx <= r_e && sx > r_e - $signed((XB+2)'(THICK))));
    on_h = inside_x && ((sy >= t_e && sy < t_e + $signed((YB+2)'(THICK))) || (sy <= b_e && sy > b_e - $signed((YB+2)'(THICK))));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= '0; y <= '0; out_valid <= 1'b0; out_sof <= 1'b0; out_pix <= '0;
      l_q <= '0; r_q <= '0; t_q <= '0; b_q <= '0;
    end else begin
      out_valid <= in_valid;
      out_sof   <= in_valid && in_sof;
      if (in_valid) begin
        if (in_sof) begin
          l_q <= l_n; r_q <= r_n; t_q <= t_n; b_q <= b_n;
        end
        out_pix <= (on_v || on_h) ? BOX_VAL : in_pix;
        if (xc == XB'(FRAME_W - 1)) begin
          x <= '0;
          y <= yc + 1'b1;
        end else begin
          x <= xc + 1'b1;
          y <= yc;
        end
      end
    end
  end
endmodule
