// hog_feat: grey and HOG feature extraction, 128x128 sample -> 32x32x33 map.
//
// The sample arrives as a 130x130 raster (128x128 plus a one-pixel ring),
// one pixel per in_valid. Two line buffers give, for every interior pixel,
// the central differences gx = p(x+1,y) - p(x-1,y), gy = p(x,y+1) - p(x,y-1).
// Orientation and magnitude are found without arctangent or square root:
// the gradient is projected on the 9 unit vectors at 0, 20, .., 160 degrees;
// the projection of largest absolute value picks the orientation and, with
// its sign, one of 18 signed bins (20 degrees each); its absolute value is
// the magnitude (within 1.6% of the Euclidean one). Magnitudes are summed per
// 4x4 cell (hard binning). When the last pixel of a cell is seen, the cell's
// 33-channel word is written to the feature map at address cy*32 + cx:
//   ch 0      grey: sum of the 16 pixels minus 16*128
//   ch 1..18  signed orientation bins 0..17 (contrast sensitive)
//   ch 19..27 unsigned bins k + (k+9) (contrast insensitive)
//   ch 28     total gradient energy of the cell
//   ch 29..32 zero (the block-normalised texture channels and the truncation
//             channel of the usual 32-channel HOG are not produced)
// The paper gives only the channel counts (1 grey + 32 HOG, 32x32 map);
// the binning, the missing block normalisation and the channel order are
// this design's choices. One pixel per cycle at most; the map is complete
// with the last ring pixel (done pulse).
module hog_feat
  import trk_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,      // clears the counters, before the first pixel
  input  logic          in_valid,
  input  logic [PW-1:0] in_pix,
  output logic          feat_we,
  output logic [9:0]    feat_addr,
  output feat_word_t    feat_data,
  output logic          done
);
  localparam int unsigned N = IMG + 2;
  localparam int unsigned HB = 14;   // histogram bin width
  // cos / sin of k*20 degrees, Q.8
  localparam logic signed [9:0] CK [9] = '{10'sd256, 10'sd241, 10'sd196, 10'sd128, 10'sd44,
                                            -10'sd44, -10'sd128, -10'sd196, -10'sd241};
  localparam logic signed [9:0] SK [9] = '{10'sd0, 10'sd88, 10'sd165, 10'sd222, 10'sd252,
                                            10'sd252, 10'sd222, 10'sd165, 10'sd88};

  logic [7:0] px, py;
  logic [PW-1:0] lb1 [N];   // row y-1
  logic [PW-1:0] lb2 [N];   // row y-2
  logic [PW-1:0] mid_d1, mid_d2, top_d1, bot_d1;
  logic [PW-1:0] top, mid;

  assign top = lb2[px];
  assign mid = lb1[px];

  // gradient of the pixel at (px-1, py-1), i.e. sample pixel (ix, iy)
  logic signed [8:0] gx, gy;
  logic [6:0] ix, iy;
  logic       gvalid;
  assign gx     = $signed({1'b0, mid}) - $signed({1'b0, mid_d2});
  assign gy     = $signed({1'b0, bot_d1}) - $signed({1'b0, top_d1});
  assign ix     = 7'(px - 8'd2);
  assign iy     = 7'(py - 8'd2);
  assign gvalid = in_valid && (px >= 8'd2) && (py >= 8'd2);

  logic signed [19:0] dot [9];
  logic [19:0] best_abs;
  logic [3:0]  best_o;
  logic        best_neg;
  logic [4:0]  bin;
  logic [11:0] mag;
  always_comb begin
    best_abs = '0; best_o = '0; best_neg = 1'b0;
    for (int k = 0; k < 9; k++) begin
      logic [19:0] a;
      dot[k] = 20'(gx) * 20'(CK[k]) + 20'(gy) * 20'(SK[k]);
      a = dot[k][19] ? 20'(-dot[k]) : 20'(dot[k]);
      if (a > best_abs) begin
        best_abs = a; best_o = 4'(k); best_neg = dot[k][19];
      end
    end
    bin = best_neg ? 5'(best_o) + 5'd9 : 5'(best_o);
    mag = 12'(best_abs >> 8);
  end

  // per-cell accumulators for the current cell row
  logic [HB-1:0] hist [MAP][18];
  logic [11:0]   gsum [MAP];
  logic [4:0]    ccx;
  logic          cell_last;
  assign ccx       = ix[6:2];
  assign cell_last = gvalid && (ix[1:0] == 2'd3) && (iy[1:0] == 2'd3);

  logic [HB-1:0] cur [18];
  logic [11:0]   gcur;
  always_comb begin
    for (int b = 0; b < 18; b++)
      cur[b] = hist[ccx][b] + ((5'(b) == bin) ? HB'(mag) : '0);
    gcur = gsum[ccx] + 12'(mid_d1);
  end

  always_comb begin
    logic [HB+4:0] tot;
    feat_data = '0;
    tot = '0;
    feat_data[0] = FW'($signed({1'b0, gcur}) - 13'sd2048);
    for (int b = 0; b < 18; b++) begin
      feat_data[1 + b] = FW'(cur[b]);
      tot += (HB+5)'(cur[b]);
    end
    for (int b = 0; b < 9; b++)
      feat_data[19 + b] = FW'(cur[b]) + FW'(cur[b + 9]);
    feat_data[28] = FW'(tot);
  end
  assign feat_we   = cell_last;
  assign feat_addr = {iy[6:2], ix[6:2]};
  assign done      = cell_last && (ix == 7'd127) && (iy == 7'd127);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      px <= '0; py <= '0;
    end else if (start) begin
      px <= '0; py <= '0;
    end else if (in_valid) begin
      if (px == 8'(N - 1)) begin
        px <= '0;
        py <= (py == 8'(N - 1)) ? '0 : py + 8'd1;
      end else begin
        px <= px + 8'd1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      lb2[px] <= mid;
      lb1[px] <= in_pix;
      mid_d2  <= mid_d1;
      mid_d1  <= mid;
      top_d1  <= top;
      bot_d1  <= in_pix;
    end
    if (start) begin
      for (int c = 0; c < MAP; c++) begin
        gsum[c] <= '0;
        for (int b = 0; b < 18; b++) hist[c][b] <= '0;
      end
    end else if (gvalid) begin
      for (int b = 0; b < 18; b++) hist[ccx][b] <= cell_last ? '0 : cur[b];
      gsum[ccx] <= cell_last ? '0 : gcur;
    end
  end
endmodule
