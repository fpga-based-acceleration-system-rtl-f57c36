// tb_interp_bilinear: the block buffer holds the linear ramp p = x + 2y, for
// which bilinear interpolation is exact, so every output pixel must equal
// sx + 2*sy (rounded, +-1) where sx, sy follow from the window size and
// centre, clamped to the buffer. Checks the 130x130 output count, the done
// pulse and the rate of one pixel per 4 cycles.
module tb_interp_bilinear;
  import trk_pkg::*;
  localparam int B = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, out_valid, done, busy;
  logic [15:0] win_w, win_h;
  logic [7:0] cx, cy, out_pix, rd_data;
  logic [11:0] rd_addr;
  int checks = 0, failures = 0;

  interp_bilinear #(.BLK(B)) dut (.*);
  assign rd_data = 8'(int'(rd_addr) % B + 2 * (int'(rd_addr) / B));

  function automatic real clampc(real v);
    if (v < 0.0) return 0.0;
    if (v > real'(B - 1) - 1.0 / 256.0) return real'(B - 1) - 1.0 / 256.0;
    return v;
  endfunction

  task automatic run(input real ww, input real wh, input int ccx, input int ccy);
    int n, bad, cyc, ndone;
    win_w = 16'(int'(ww * 256.0)); win_h = 16'(int'(wh * 256.0)); cx = 8'(ccx); cy = 8'(ccy);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    n = 0; bad = 0; cyc = 0; ndone = 0;
    while (n < 130 * 130 && cyc < 100000) begin
      @(posedge clk); cyc++;
      if (out_valid) begin
        automatic int i = n / 130 - 1, j = n % 130 - 1;
        automatic real sx = clampc(real'(ccx) + (real'(j) - 63.5) * ww / 128.0);
        automatic real sy = clampc(real'(ccy) + (real'(i) - 63.5) * wh / 128.0);
        automatic real e = sx + 2.0 * sy;
        automatic real d = real'(out_pix) - e;
        if (d > 1.01 || d < -1.01) begin
          bad++;
          if (bad < 5) $display("FAIL (%0d,%0d): %0d expected %f", i, j, out_pix, e);
        end
        if (done) ndone++;
        n++;
      end
    end
    checks++; if (bad != 0) failures++;
    checks++; if (n != 130 * 130) failures++;
    checks++; if (ndone != 1) begin failures++; $display("FAIL done count %0d", ndone); end
    checks++; if (cyc > 130 * 130 * 4 + 4) begin failures++; $display("FAIL %0d cycles", cyc); end
    $display("window %f x %f: %0d pixels, %0d bad, %0d cycles", ww, wh, n, bad, cyc);
    repeat (2) @(negedge clk);
  endtask

  initial begin
    start = 0; win_w = 0; win_h = 0; cx = 0; cy = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    run(40.0, 40.0, 32, 32);
    run(25.5, 50.25, 30, 28);
    run(100.0, 90.0, 32, 32);   // reaches past the buffer: clamped
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
