// tb_hog_feat: feeds random 130x130 images and a pure horizontal ramp, and
// compares every written feature word with a behavioural model of the
// feature definition: central differences, projection on the unit vectors
// at k*20 degrees (Q.8 coefficients round(256 cos), round(256 sin)), the
// largest |projection| picks the signed bin and gives the magnitude (>>8),
// sums over 4x4 cells; grey = pixel sum - 2048. Also checks that all 1024
// cells are written once and done pulses once.
module tb_hog_feat;
  import trk_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, in_valid, feat_we, done;
  logic [7:0] in_pix;
  logic [9:0] feat_addr;
  feat_word_t feat_data;
  int checks = 0, failures = 0;

  hog_feat dut (.*);

  int img [130][130];
  int expf [1024][33];
  int ck [9], sk [9];

  task automatic model();
    for (int a = 0; a < 1024; a++) for (int c = 0; c < 33; c++) expf[a][c] = 0;
    for (int iy = 0; iy < 128; iy++)
      for (int ix = 0; ix < 128; ix++) begin
        automatic int gx = img[iy+1][ix+2] - img[iy+1][ix];
        automatic int gy = img[iy+2][ix+1] - img[iy][ix+1];
        automatic int best = 0, bo = 0, neg = 0, bin, mag;
        automatic int a = (iy / 4) * 32 + ix / 4;
        for (int k = 0; k < 9; k++) begin
          automatic int d = gx * ck[k] + gy * sk[k];
          automatic int ad = d < 0 ? -d : d;
          if (ad > best) begin best = ad; bo = k; neg = d < 0; end
        end
        bin = neg ? bo + 9 : bo;
        mag = best >> 8;
        expf[a][1 + bin] += mag;
        expf[a][0] += img[iy+1][ix+1];
      end
    for (int a = 0; a < 1024; a++) begin
      expf[a][0] -= 2048;
      for (int b = 0; b < 9; b++) expf[a][19 + b] = expf[a][1 + b] + expf[a][10 + b];
      for (int b = 0; b < 18; b++) expf[a][28] += expf[a][1 + b];
    end
  endtask

  int seen [1024];
  int bad, ndone;
  always @(posedge clk) if (rst_n) begin
    if (feat_we) begin
      seen[feat_addr]++;
      for (int c = 0; c < 33; c++)
        if (int'($signed(feat_data[c])) != expf[feat_addr][c]) begin
          bad++;
          if (bad < 6) $display("FAIL cell %0d ch %0d: %0d expected %0d", feat_addr, c,
                                $signed(feat_data[c]), expf[feat_addr][c]);
        end
    end
    if (done) ndone++;
  end

  task automatic run(input string what);
    model();
    for (int a = 0; a < 1024; a++) seen[a] = 0;
    bad = 0; ndone = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int y = 0; y < 130; y++)
      for (int x = 0; x < 130; x++) begin
        @(negedge clk); in_valid = 1; in_pix = 8'(img[y][x]);
        if ($urandom_range(0, 2) == 0) begin @(negedge clk); in_valid = 0; end
      end
    @(negedge clk); in_valid = 0;
    repeat (3) @(negedge clk);
    checks++; if (bad != 0) failures++;
    checks++; if (ndone != 1) failures++;
    for (int a = 0; a < 1024; a++) begin checks++; if (seen[a] != 1) failures++; end
    $display("%s: %0d bad channel values, done %0d", what, bad, ndone);
  endtask

  initial begin
    for (int k = 0; k < 9; k++) begin
      ck[k] = int'($floor(256.0 * $cos(3.14159265358979 * k / 9.0) + 0.5));
      sk[k] = int'($floor(256.0 * $sin(3.14159265358979 * k / 9.0) + 0.5));
    end
    start = 0; in_valid = 0; in_pix = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int y = 0; y < 130; y++) for (int x = 0; x < 130; x++) img[y][x] = int'($urandom_range(0, 255));
    run("random");
    for (int y = 0; y < 130; y++) for (int x = 0; x < 130; x++) img[y][x] = x;
    run("ramp");
    // the ramp has all its energy in bin 0: 16 pixels * (2*256)>>8
    checks++; if (expf[100][1] != 32) failures++;
    for (int y = 0; y < 130; y++) for (int x = 0; x < 130; x++) img[y][x] = ((x / 6 + y / 5) % 2) * 200 + (x * y) % 17;
    run("pattern");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
