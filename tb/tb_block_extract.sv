// tb_block_extract: streams frames whose pixel value is a known function of
// (x, y) and checks that the captured square holds exactly the pixels
// around the target, clamped at the frame edges, that blk_cx/blk_cy give
// the target inside the square, that done pulses once per armed frame and
// that an unarmed frame leaves the buffer unchanged.
module tb_block_extract;
  import trk_pkg::*;
  localparam int W = 96, H = 80, B = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic arm, pix_valid, sof, capturing, done;
  logic [6:0] cx, cy;
  logic [7:0] pix, rd_data, blk_cx, blk_cy;
  logic [9:0] rd_addr;
  int checks = 0, failures = 0, ndone;

  block_extract #(.FRAME_W(W), .FRAME_H(H), .BLK(B)) dut (.*);

  function automatic logic [7:0] pv(int x, int y, int k); return 8'(x * 3 + y * 7 + k); endfunction

  task automatic frame(input int k, input logic a);
    ndone = 0;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        if ($urandom_range(0, 3) == 0) begin   // idle gap
          @(negedge clk); pix_valid = 0; sof = 0;
        end
        @(negedge clk);
        arm = a; pix_valid = 1; sof = (x == 0 && y == 0); pix = pv(x, y, k);
      end
    @(negedge clk); pix_valid = 0; sof = 0; arm = 0;
    repeat (3) @(negedge clk);
  endtask

  always @(posedge clk) if (done) ndone++;

  task automatic check_block(input int tx, input int ty, input int k);
    int x0, y0, bad;
    x0 = tx - B/2; if (x0 < 0) x0 = 0; if (x0 > W - B) x0 = W - B;
    y0 = ty - B/2; if (y0 < 0) y0 = 0; if (y0 > H - B) y0 = H - B;
    bad = 0;
    for (int y = 0; y < B; y++)
      for (int x = 0; x < B; x++) begin
        rd_addr = 10'(y * B + x); #1;
        if (rd_data != pv(x0 + x, y0 + y, k)) bad++;
      end
    checks++; if (bad != 0) begin failures++; $display("FAIL block (%0d,%0d): %0d bad", tx, ty, bad); end
    checks++; if (int'(blk_cx) != tx - x0 || int'(blk_cy) != ty - y0) begin
      failures++; $display("FAIL centre %0d %0d", blk_cx, blk_cy); end
    checks++; if (ndone != 1) begin failures++; $display("FAIL done count %0d", ndone); end
  endtask

  initial begin
    arm = 0; pix_valid = 0; sof = 0; pix = 0; cx = 50; cy = 40; rd_addr = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    cx = 50; cy = 40; frame(0, 1); check_block(50, 40, 0);
    cx = 5;  cy = 70; frame(1, 1); check_block(5, 70, 1);
    cx = 90; cy = 3;  frame(2, 1); check_block(90, 3, 2);
    // not armed: nothing changes
    cx = 40; cy = 40; frame(3, 0);
    checks++; if (ndone != 0) failures++;
    ndone = 1;
    check_block(90, 3, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
