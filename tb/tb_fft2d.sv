// tb_fft2d: self-checking test of the 32x32 2-D FFT/IFFT.
// Drives random 32x32 complex data, compares the forward result with a
// separable floating-point DFT divided by 1024, then runs the inverse on
// the forward result and compares it with the original data. Also checks
// that one 2-D transform completes within 10,000 cycles.
module tb_fft2d;
  import trk_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, inverse, in_valid, in_ready, out_valid, done, busy;
  cplx_t in_data, out_data;
  logic [9:0] out_idx;
  int checks = 0, failures = 0;

  fft2d dut (.*);

  real xr[32][32], xi[32][32], tr_[32][32], ti_[32][32], yr[32][32], yi[32][32];
  real fr[32][32], fi[32][32];
  cplx_t src[1024];
  real cw[32], sw[32];

  task automatic ref_dft();
    // rows then columns, forward, then /1024
    for (int r = 0; r < 32; r++)
      for (int k = 0; k < 32; k++) begin
        real ar = 0, ai = 0;
        for (int n = 0; n < 32; n++) begin
          int m = (k * n) % 32;
          ar += xr[r][n] * cw[m] + xi[r][n] * sw[m];
          ai += xi[r][n] * cw[m] - xr[r][n] * sw[m];
        end
        tr_[r][k] = ar; ti_[r][k] = ai;
      end
    for (int c = 0; c < 32; c++)
      for (int k = 0; k < 32; k++) begin
        real ar = 0, ai = 0;
        for (int n = 0; n < 32; n++) begin
          int m = (k * n) % 32;
          ar += tr_[n][c] * cw[m] + ti_[n][c] * sw[m];
          ai += ti_[n][c] * cw[m] - tr_[n][c] * sw[m];
        end
        yr[k][c] = ar / 1024.0; yi[k][c] = ai / 1024.0;
      end
  endtask

  task automatic run(input logic inv, output int cycles);
    int fed = 0, got = 0;
    @(negedge clk); start = 1; inverse = inv; @(negedge clk); start = 0;
    cycles = 1;
    while (got < 1024) begin
      in_valid = (fed < 1024);
      in_data  = src[fed < 1024 ? fed : 0];
      @(posedge clk);
      if (in_valid && in_ready) fed++;
      if (out_valid) begin
        fr[out_idx[9:5]][out_idx[4:0]] = real'(out_data.re);
        fi[out_idx[9:5]][out_idx[4:0]] = real'(out_data.im);
        got++;
      end
      cycles++;
      @(negedge clk);
    end
    in_valid = 0;
  endtask

  function automatic real absr(real v); return v < 0 ? -v : v; endfunction

  initial begin
    int cyc, bad;
    real maxerr;
    for (int m = 0; m < 32; m++) begin
      cw[m] = $cos(2.0 * 3.14159265358979 * m / 32.0);
      sw[m] = $sin(2.0 * 3.14159265358979 * m / 32.0);
    end
    start = 0; inverse = 0; in_valid = 0; in_data = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 32; r++)
      for (int c = 0; c < 32; c++) begin
        automatic int vr = int'($urandom_range(0, 200000)) - 100000;
        automatic int vi = int'($urandom_range(0, 200000)) - 100000;
        if (r == 3 && c == 5) vr = 3000000;  // a strong spectral line
        xr[r][c] = vr; xi[r][c] = vi;
        src[r*32+c].re = DW'(vr); src[r*32+c].im = DW'(vi);
      end
    ref_dft();
    run(1'b0, cyc);
    checks++; if (cyc > 10000) begin failures++; $display("FAIL forward cycles %0d", cyc); end
    $display("forward 2-D transform took %0d cycles", cyc);
    bad = 0; maxerr = 0;
    for (int r = 0; r < 32; r++)
      for (int c = 0; c < 32; c++) begin
        automatic real e = absr(fr[r][c] - yr[r][c]) + absr(fi[r][c] - yi[r][c]);
        if (e > maxerr) maxerr = e;
        checks++; if (e > 40.0) begin failures++; bad++; end
      end
    $display("forward max error %f LSB, %0d bad", maxerr, bad);
    // inverse of the forward result must give back the input
    for (int i = 0; i < 1024; i++) begin
      src[i].re = DW'(int'(fr[i/32][i%32])); src[i].im = DW'(int'(fi[i/32][i%32]));
    end
    run(1'b1, cyc);
    bad = 0; maxerr = 0;
    for (int r = 0; r < 32; r++)
      for (int c = 0; c < 32; c++) begin
        // the inverse output is indexed the same way, and IDFT2(DFT2(x)/1024) = x/1024
        automatic real e = absr(fr[r][c] * 1024.0 - xr[r][c]) + absr(fi[r][c] * 1024.0 - xi[r][c]);
        if (e > maxerr) maxerr = e;
        checks++; if (e > 80000.0) begin failures++; bad++; end
      end
    $display("inverse max error %f, %0d bad", maxerr, bad);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
