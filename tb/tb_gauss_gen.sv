// tb_gauss_gen: checks the streamed label against
// 2^20 * exp(-(d(r)^2 + d(c)^2) / 8) with circular distances d (sigma = 2),
// within 0.2% of the peak, that 1024 values leave in raster order under
// random back-pressure, and that the peak is at (0,0).
module tb_gauss_gen;
  import trk_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, out_valid, out_ready;
  cplx_t out_data;
  int checks = 0, failures = 0, n = 0, bad = 0, peak_at = -1;
  int peak = -1;

  gauss_gen dut (.*);

  initial begin
    start = 0; out_ready = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (n < 1024) begin
      out_ready = ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (out_valid && out_ready) begin
        automatic int r = n / 32, c = n % 32;
        automatic int dr = r > 16 ? 32 - r : r;
        automatic int dc = c > 16 ? 32 - c : c;
        automatic real e = 1048576.0 * $exp(-real'(dr*dr + dc*dc) / 8.0);
        automatic real d = real'(out_data.re) - e;
        if (d > 2100.0 || d < -2100.0 || out_data.im != 0) begin
          bad++; if (bad < 5) $display("FAIL %0d: %0d expected %f", n, out_data.re, e);
        end
        if (int'(out_data.re) > peak) begin peak = int'(out_data.re); peak_at = n; end
        n++;
      end
      @(negedge clk);
    end
    @(negedge clk);
    checks++; if (bad != 0) failures++;
    checks++; if (peak_at != 0) failures++;
    checks++; if (out_valid) failures++;   // stops after 1024
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
