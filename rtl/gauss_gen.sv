// gauss_gen: streams the desired correlation output g, a 32x32 Gaussian.
//
// g(r, c) = g1(d(r)) * g1(d(c)), d(i) = min(i, 32 - i), so the peak sits at
// (0, 0) with circular wrap-around; a target displacement of (dy, dx) cells
// then shows up as a response peak at (dy, dx). The 1-D profile is
// g1(d) = round(32767 * exp(-d^2 / (2 * sigma^2))) with sigma = 2 cells,
// d = 0..16 (the paper does not give sigma). Output values are Q.20
// (1.0 = 2^20), in raster order with a valid/ready handshake; the label is
// real, so out_data.im is always zero.
module gauss_gen
  import trk_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  output logic  out_valid,
  input  logic  out_ready,
  output cplx_t out_data
);
  localparam logic [15:0] G1 [17] = '{16'd32767, 16'd28917, 16'd19874, 16'd10638, 16'd4435,
                                       16'd1440, 16'd364, 16'd72, 16'd11, 16'd1, 16'd0, 16'd0,
                                       16'd0, 16'd0, 16'd0, 16'd0, 16'd0};
  logic [10:0] cnt;
  logic [4:0]  r, c, dr, dc;
  logic [31:0] prod;

  assign r  = cnt[9:5];
  assign c  = cnt[4:0];
  assign dr = (r > 5'd16) ? 5'd0 - r : r;
  assign dc = (c > 5'd16) ? 5'd0 - c : c;
  assign prod        = 32'(G1[dr]) * 32'(G1[dc]);
  assign out_valid   = !cnt[10];
  assign out_data.re = DW'(prod >> 10);
  assign out_data.im = '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      cnt <= 11'h400;
    else if (start)                  cnt <= '0;
    else if (out_valid && out_ready) cnt <= cnt + 11'd1;
  end
endmodule
