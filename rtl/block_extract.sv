// block_extract: captures the largest-scale image block around the target.
//
// The incoming frame arrives as a raster pixel stream (one grey pixel per
// pix_valid, sof with the first pixel). At the start of a frame, when
// `arm` is set, the block captures the BLK x BLK square centred on the
// target (cx, cy) into an on-chip block buffer. All seven candidate windows
// are later read from this one buffer, so the frame itself is never stored.
// The square is moved inside the frame where the target is near an edge;
// blk_cx/blk_cy give the target centre relative to the captured square.
//   rd_addr/rd_data : random read port of the buffer (row*BLK + col),
//                     combinational read
//   done            : one-cycle pulse after the last pixel of an armed frame
// The buffer size BLK and the clamping are this design's choices.
module block_extract
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
  input  logic          arm,        // capture the next frame
  input  logic [XB-1:0] cx,
  input  logic [YB-1:0] cy,
  input  logic          pix_valid,
  input  logic          sof,
  input  logic [PW-1:0] pix,
  output logic          capturing,
  output logic          done,
  output logic [7:0]    blk_cx,
  output logic [7:0]    blk_cy,
  input  logic [AB-1:0] rd_addr,
  output logic [PW-1:0] rd_data
);
  logic [XB-1:0] x, x0;
  logic [YB-1:0] y, y0;
  logic          active;
  logic [XB-1:0] x0_n, x_cur;
  logic [YB-1:0] y0_n, y_cur;

  // clamp the square inside the frame
  always_comb begin
    if (cx < XB'(BLK / 2))                 x0_n = '0;
    else if (cx > XB'(FRAME_W - BLK / 2))  x0_n = XB'(FRAME_W - BLK);
    else                                   x0_n = cx - XB'(BLK / 2);
    if (cy < YB'(BLK / 2))                 y0_n = '0;
    else if (cy > YB'(FRAME_H - BLK / 2))  y0_n = YB'(FRAME_H - BLK);
    else                                   y0_n = cy - YB'(BLK / 2);
    x_cur = sof ? '0 : x;
    y_cur = sof ? '0 : y;
  end

  logic          in_blk, cap_now, last_pix;
  logic [XB-1:0] bx;
  logic [YB-1:0] by;
  logic [XB-1:0] ox;
  logic [YB-1:0] oy;
  assign ox      = sof ? x0_n : x0;
  assign oy      = sof ? y0_n : y0;
  assign bx      = x_cur - ox;
  assign by      = y_cur - oy;
  assign in_blk  = (x_cur >= ox) && (x_cur < ox + XB'(BLK)) && (y_cur >= oy) && (y_cur < oy + YB'(BLK));
  assign cap_now = pix_valid && (sof ? arm : active) && in_blk;
  assign last_pix = pix_valid && (x_cur == XB'(FRAME_W - 1)) && (y_cur == YB'(FRAME_H - 1));

  sdp_ram #(.WIDTH(PW), .DEPTH(BLK * BLK)) u_buf (
    .clk, .we(cap_now), .waddr(AB'(by) * AB'(BLK) + AB'(bx)), .wdata(pix),
    .raddr(rd_addr), .rdata(rd_data));

  assign capturing = active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= '0; y <= '0; x0 <= '0; y0 <= '0;
      active <= 1'b0; done <= 1'b0; blk_cx <= '0; blk_cy <= '0;
    end else begin
      done <= 1'b0;
      if (pix_valid) begin
        if (sof && arm) begin
          active <= 1'b1;
          x0     <= x0_n;
          y0     <= y0_n;
          blk_cx <= 8'(cx - x0_n);
          blk_cy <= 8'(cy - y0_n);
        end
        if (x_cur == XB'(FRAME_W - 1)) begin
          x <= '0;
          y <= y_cur + 1'b1;
        end else begin
          x <= x_cur + 1'b1;
          y <= y_cur;
        end
        if (last_pix && (active || (sof && arm))) begin
          active <= 1'b0;
          done   <= 1'b1;
        end
      end
    end
  end
endmodule
