// tb_box_overlay: streams frames of a constant grey level through the
// overlay and checks every output pixel: white on the 2-pixel outline of
// the box (including boxes cut by the frame edge), unchanged elsewhere, one
// cycle of latency, and a box change taking effect only at the next frame.
module tb_box_overlay;
  import trk_pkg::*;
  localparam int W = 64, H = 48;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [5:0] cx, w;
  logic [5:0] cy, h;
  logic in_valid, in_sof, out_valid, out_sof;
  logic [7:0] in_pix, out_pix;
  int checks = 0, failures = 0;

  box_overlay #(.FRAME_W(W), .FRAME_H(H)) dut (.*);

  function automatic bit on_box(int x, int y, int bcx, int bcy, int bw, int bh);
    int l, r, t, b;
    l = bcx - bw / 2; r = l + bw - 1; t = bcy - bh / 2; b = t + bh - 1;
    if (x < l || x > r || y < t || y > b) return 0;
    return (x < l + 2) || (x > r - 2) || (y < t + 2) || (y > b - 2);
  endfunction

  task automatic frame(input int bcx, input int bcy, input int bw, input int bh);
    int bad = 0, n = 0, sofs = 0;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        @(negedge clk);
        in_valid = 1; in_sof = (x == 0 && y == 0); in_pix = 8'd77;
        if (x == 5 && y == 5) begin cx = 6'(bcx + 9); cy = 6'(bcy + 3); end   // mid-frame change
        @(posedge clk); #1;
        checks++;
        if (!out_valid || out_pix != (on_box(x, y, bcx, bcy, bw, bh) ? 8'hFF : 8'd77)) begin
          bad++;
          if (bad < 4) $display("  pixel %0d,%0d: %0d l=%0d r=%0d t=%0d b=%0d", x, y, out_pix, dut.l_q, dut.r_q, dut.t_q, dut.b_q);
        end
        if (out_sof) sofs++;
        n++;
      end
    @(negedge clk); in_valid = 0;
    if (bad != 0) begin failures += bad; $display("FAIL box %0d,%0d %0dx%0d: %0d bad", bcx, bcy, bw, bh, bad); end
    checks++; if (sofs != 1) failures++;
    cx = 6'(bcx); cy = 6'(bcy);
  endtask

  initial begin
    in_valid = 0; in_sof = 0; in_pix = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    cx = 30; cy = 20; w = 20; h = 10; frame(30, 20, 20, 10);
    cx = 3;  cy = 45; w = 16; h = 12; frame(3, 45, 16, 12);
    cx = 60; cy = 2;  w = 11; h = 7;  frame(60, 2, 11, 7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
