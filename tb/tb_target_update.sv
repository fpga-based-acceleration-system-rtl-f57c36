// tb_target_update: applies peaks and checks the new centre against
// cx + round(cell displacement * window / 32) with wrap-around of the peak
// index, clamping at the frame border, the choice of the best scale and
// the clamping of the scale factor.
module tb_target_update;
  import trk_pkg::*;
  localparam int W = 1280, H = 720;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic init, update;
  logic [10:0] init_cx, cx;
  logic [9:0]  init_cy, cy, pos_peak_idx;
  logic [NSCALE-1:0][DW-1:0] scale_peak;
  logic [NSCALE-1:0][15:0] cand_scale;
  logic [15:0] win_w, win_h, scale;
  logic [2:0] best_n;
  int checks = 0, failures = 0;

  target_update #(.FRAME_W(W), .FRAME_H(H)) dut (.*);

  task automatic step(input int px, input int py, input int bestn, input real ww, input real wh);
    int ecx, ecy, sdx, sdy;
    real es;
    sdx = px >= 16 ? px - 32 : px;
    sdy = py >= 16 ? py - 32 : py;
    ecx = int'(cx) + int'($floor(real'(sdx) * ww / 32.0 + 0.5));
    ecy = int'(cy) + int'($floor(real'(sdy) * wh / 32.0 + 0.5));
    if (ecx < 0) ecx = 0; if (ecx > W - 1) ecx = W - 1;
    if (ecy < 0) ecy = 0; if (ecy > H - 1) ecy = H - 1;
    for (int n = 0; n < 7; n++) begin
      scale_peak[n] = DW'(int'($urandom_range(1000, 5000)));
      cand_scale[n] = 16'(int'(real'(scale) * (0.985 + 0.005 * n)));
    end
    scale_peak[bestn] = DW'(9000);
    es = real'(cand_scale[bestn]);
    if (es < 4096.0) es = 4096.0;
    if (es > 49152.0) es = 49152.0;
    pos_peak_idx = 10'(py * 32 + px);
    win_w = 16'(int'(ww * 256.0)); win_h = 16'(int'(wh * 256.0));
    @(negedge clk); update = 1; @(negedge clk); update = 0;
    checks++;
    if (int'(cx) != ecx || int'(cy) != ecy) begin
      failures++; $display("FAIL centre %0d,%0d expected %0d,%0d", cx, cy, ecx, ecy);
    end
    checks++;
    if (int'(best_n) != bestn || real'(scale) != es) begin
      failures++; $display("FAIL scale %0d (n=%0d) expected %f (n=%0d)", scale, best_n, es, bestn);
    end
  endtask

  initial begin
    init = 0; update = 0; init_cx = 640; init_cy = 360; pos_peak_idx = 0;
    scale_peak = '0; cand_scale = '0; win_w = 0; win_h = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk); init = 1; @(negedge clk); init = 0;
    checks++; if (cx != 640 || cy != 360 || scale != 16384) failures++;
    step(3, 0, 3, 100.0, 100.0);
    step(30, 2, 6, 120.0, 80.0);
    step(0, 17, 0, 64.0, 64.0);
    for (int t = 0; t < 40; t++)
      step(int'($urandom_range(0, 31)), int'($urandom_range(0, 31)), int'($urandom_range(0, 6)),
           real'($urandom_range(20, 156)), real'($urandom_range(20, 156)));
    // run into the left border
    for (int t = 0; t < 40; t++) step(16, 0, 0, 150.0, 150.0);
    checks++; if (cx != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
