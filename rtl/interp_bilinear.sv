// interp_bilinear: resamples one candidate window to the fixed 128x128 size.
//
// For output pixel (i, j) the source point in the block buffer is
//   sx = cx + (j - 63.5) * win_w / 128,  sy = cy + (i - 63.5) * win_h / 128
// and the output is the bilinear blend of the four surrounding pixels with
// 8-bit fractional weights. The output raster is 130 x 130: the 128 x 128
// sample plus a one-pixel ring (i, j = -1 and 128), which the feature stage
// needs to take central differences at the sample border.
// The paper names the interpolation and the 128x128 size; bilinear weights
// and the ring are this design's choice. One buffer read port is shared
// over four cycles, so one output pixel leaves every 4 cycles
// (130*130*4 = 67,600 cycles per window).
//   start           : pulse, latches window size and centre
//   win_w/win_h     : window size, Q8.8 pixels
//   cx/cy           : target centre inside the block buffer, pixels
//   rd_addr/rd_data : block buffer read port (combinational data)
//   out_valid/out_pix, done (with the last pixel)
module interp_bilinear
  import trk_pkg::*;
#(
  parameter int unsigned BLK = 160,
  localparam int unsigned AB = $clog2(BLK * BLK)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [15:0]   win_w,
  input  logic [15:0]   win_h,
  input  logic [7:0]    cx,
  input  logic [7:0]    cy,
  output logic [AB-1:0] rd_addr,
  input  logic [PW-1:0] rd_data,
  output logic          out_valid,
  output logic [PW-1:0] out_pix,
  output logic          done,
  output logic          busy
);
  localparam int unsigned OUTN = IMG + 2;
  localparam logic signed [24:0] MAXC = 25'((BLK - 1) << 8) - 25'sd1;

  logic        run;
  logic [7:0]  oi, oj;       // output row / column, 0..129 (sample index + 1)
  logic [1:0]  ph;           // which of the 4 neighbours is read
  logic [15:0] ww, wh;
  logic [7:0]  ccx, ccy;
  logic [PW-1:0] p00, p01, p10;

  // source coordinates in Q.8
  function automatic logic signed [24:0] src_coord(logic [7:0] c, logic [7:0] o, logic [15:0] w);
    logic signed [9:0]  k;
    logic signed [27:0] off;
    logic signed [24:0] v;
    k   = 10'(2 * $signed({2'b0, o}) - 10'sd129);   // 2*(o-1) - 127
    off = 28'(k) * $signed({1'b0, w});
    v   = 25'($signed({1'b0, c, 8'b0})) + 25'(off >>> 8);
    if (v < 0)     v = 0;
    if (v > MAXC)  v = MAXC;
    return v;
  endfunction

  logic signed [24:0] sx, sy;
  logic [7:0] x0, y0, x1, y1, fx, fy;
  always_comb begin
    sx = src_coord(ccx, oj, ww);
    sy = src_coord(ccy, oi, wh);
    x0 = 8'(sx >>> 8);  fx = sx[7:0];
    y0 = 8'(sy >>> 8);  fy = sy[7:0];
    x1 = x0 + 8'd1;
    y1 = y0 + 8'd1;
    unique case (ph)
      2'd0: rd_addr = AB'(y0) * AB'(BLK) + AB'(x0);
      2'd1: rd_addr = AB'(y0) * AB'(BLK) + AB'(x1);
      2'd2: rd_addr = AB'(y1) * AB'(BLK) + AB'(x0);
      default: rd_addr = AB'(y1) * AB'(BLK) + AB'(x1);
    endcase
  end

  // blend, using the fourth pixel straight from the read port
  logic [17:0] top, bot;
  logic [25:0] mix;
  always_comb begin
    top = 18'(p00) * 18'(9'd256 - 9'(fx)) + 18'(p01) * 18'(fx);
    bot = 18'(p10) * 18'(9'd256 - 9'(fx)) + 18'(rd_data) * 18'(fx);
    mix = 26'(top) * 26'(9'd256 - 9'(fy)) + 26'(bot) * 26'(fy) + 26'd32768;
  end

  assign out_valid = run && (ph == 2'd3);
  assign out_pix   = PW'(mix >> 16);
  assign done      = out_valid && (oi == 8'(OUTN - 1)) && (oj == 8'(OUTN - 1));
  assign busy      = run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; oi <= '0; oj <= '0; ph <= '0;
      ww <= '0; wh <= '0; ccx <= '0; ccy <= '0;
      p00 <= '0; p01 <= '0; p10 <= '0;
    end else if (!run) begin
      if (start) begin
        run <= 1'b1; oi <= '0; oj <= '0; ph <= '0;
        ww <= win_w; wh <= win_h; ccx <= cx; ccy <= cy;
      end
    end else begin
      ph <= ph + 2'd1;
      unique case (ph)
        2'd0: p00 <= rd_data;
        2'd1: p01 <= rd_data;
        2'd2: p10 <= rd_data;
        default: begin
          if (oj == 8'(OUTN - 1)) begin
            oj <= '0;
            if (oi == 8'(OUTN - 1)) run <= 1'b0;
            else                    oi <= oi + 8'd1;
          end else begin
            oj <= oj + 8'd1;
          end
        end
      endcase
    end
  end
endmodule
