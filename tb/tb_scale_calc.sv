// tb_scale_calc: checks the seven candidate window sizes and scale factors
// against a floating-point computation of a_n * s * W with
// a_n = 0.985 .. 1.015, for random base sizes and scale factors, and that
// oversized windows are clamped to MAXWIN.
module tb_scale_calc;
  import trk_pkg::*;
  logic [7:0] base_w, base_h;
  logic [15:0] cur_scale;
  logic [NSCALE-1:0][15:0] win_w, win_h, cand_scale;
  int checks = 0, failures = 0;
  real a [7] = '{0.985, 0.990, 0.995, 1.0, 1.005, 1.010, 1.015};

  scale_calc dut (.*);

  function automatic real absr(real v); return v < 0 ? -v : v; endfunction

  initial begin
    for (int t = 0; t < 200; t++) begin
      base_w = 8'($urandom_range(16, 150));
      base_h = 8'($urandom_range(16, 150));
      cur_scale = 16'($urandom_range(8192, 20000));   // 0.5 .. 1.22
      #1;
      for (int n = 0; n < 7; n++) begin
        automatic real s  = real'(cur_scale) / 16384.0 * a[n];
        automatic real ew = real'(base_w) * s;
        automatic real eh = real'(base_h) * s;
        if (ew > 156.0) ew = 156.0;
        if (eh > 156.0) eh = 156.0;
        checks++;
        if (absr(real'(win_w[n]) / 256.0 - ew) > 0.02 || absr(real'(win_h[n]) / 256.0 - eh) > 0.02) begin
          failures++;
          $display("FAIL n=%0d w=%0d h=%0d s=%0d: got %f %f expected %f %f", n, base_w, base_h,
                   cur_scale, real'(win_w[n]) / 256.0, real'(win_h[n]) / 256.0, ew, eh);
        end
        checks++;
        if (absr(real'(cand_scale[n]) / 16384.0 - s) > 0.001) begin
          failures++;
          $display("FAIL scale n=%0d: got %f expected %f", n, real'(cand_scale[n]) / 16384.0, s);
        end
      end
      // the sizes must grow with n
      checks++;
      if (!(win_w[0] < win_w[6] || win_w[6] == 16'(156 * 256))) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
