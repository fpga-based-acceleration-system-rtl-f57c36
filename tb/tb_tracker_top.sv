// tb_tracker_top: end-to-end test of the tracker on a synthetic video.
// A textured 40x40 object moves over a weakly textured background; after
// `init` on the first frame, every processed frame must report a centre
// within 4 pixels of the true one. Between processed frames one extra
// frame is sent while the tracker is busy; it must pass to the output
// untracked. The test counts each mechanism of the design and fails if one
// never happened: Gaussian label transform, first-frame model set-up,
// feature batches (8 per pass), inverse transforms of the response, scale
// candidates evaluated, scale changes, model updates, reciprocal
// recomputation, skipped busy frames and box pixels drawn into the output
// video. The processing time of a frame (end of capture to frame_done) must
// fit 153 frames/s at an assumed 200 MHz clock (1,307,189 cycles).
module tb_tracker_top;
  import trk_pkg::*;
  localparam int W = 256, H = 200, NFR = 6;
  localparam int XB = $clog2(W), YB = $clog2(H);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic init, pix_valid, sof, out_valid, out_sof, frame_done, ready;
  logic [XB-1:0] init_cx, tgt_cx, init_box_w;
  logic [YB-1:0] init_cy, tgt_cy, init_box_h;
  logic [7:0] init_win_w, init_win_h, pix, out_pix;
  logic [15:0] tgt_scale;
  logic [2:0] tgt_best_n;
  int checks = 0, failures = 0;

  tracker_top #(.FRAME_W(W), .FRAME_H(H)) dut (.*);

  // ---- mechanism counters ----
  int n_gauss = 0, n_first = 0, n_batch = 0, n_inv = 0, n_cand = 0, n_update = 0;
  int n_recip = 0, n_skipped = 0, n_boxpix = 0, n_frames = 0, n_scale_moves = 0;
  // processing time of a frame: from the end of the block capture to frame_done
  int t_cap = 0, proc_cycles = 0, proc_max = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.cap_done) t_cap = int'($time / 10);
    if (frame_done) begin
      proc_cycles = int'($time / 10) - t_cap;
      if (proc_cycles > proc_max) proc_max = proc_cycles;
    end
  end
  always @(posedge clk) if (rst_n) begin
    if (dut.u_eng.cmd_start && dut.u_eng.cmd_mode == ENG_GAUSS) n_gauss++;
    if (dut.u_eng.cmd_start && dut.u_eng.cmd_mode == ENG_TRAIN && dut.u_eng.cmd_first) n_first++;
    if (dut.u_eng.cmd_start && dut.u_eng.cmd_mode == ENG_TRAIN && !dut.u_eng.cmd_first) n_update++;
    if (dut.u_eng.state == dut.u_eng.S_BSTART) n_batch++;
    if (dut.u_eng.state == dut.u_eng.S_ISTART) n_inv++;
    if (dut.u_eng.cmd_start && dut.u_eng.cmd_mode == ENG_DETECT) n_cand++;
    if (dut.u_eng.d0_done) n_recip++;
    if (out_valid && out_pix == 8'hFF) n_boxpix++;
  end

  function automatic int px_val(int x, int y, int ox, int oy);
    int u, v;
    u = x - ox; v = y - oy;
    if (u >= -20 && u < 20 && v >= -20 && v < 20)
      return 50 + 140 * (((u + 20) / 5 + (v + 20) / 7) % 2) + ((u + 20) * (v + 20)) % 23;
    return 100 + ((x * 7 + y * 13) % 16);
  endfunction

  task automatic send_frame(input int ox, input int oy);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        @(negedge clk);
        pix_valid = 1; sof = (x == 0 && y == 0); pix = 8'(px_val(x, y, ox, oy));
      end
    @(negedge clk); pix_valid = 0; sof = 0;
  endtask

  int ox, oy, t0, cyc_frame;
  initial begin
    init = 0; pix_valid = 0; sof = 0; pix = 0;
    init_cx = '0; init_cy = '0; init_win_w = 100; init_win_h = 100; init_box_w = 40; init_box_h = 40;
    repeat (3) @(negedge clk); rst_n = 1;
    wait (ready); @(negedge clk);
    ox = 110; oy = 90;
    init_cx = XB'(ox); init_cy = YB'(oy);
    init = 1; @(negedge clk); init = 0;
    send_frame(ox, oy);
    wait (frame_done); @(negedge clk);
    for (int f = 1; f < NFR; f++) begin
      ox += 5; oy += (f % 2) ? 3 : -2;
      t0 = $time;
      send_frame(ox, oy);
      send_frame(ox, oy);             // arrives while busy: passed through only
      n_skipped++;
      wait (frame_done); @(negedge clk);
      cyc_frame = int'(($time - t0) / 10);
      n_frames++;
      if (tgt_best_n != 3'd3) n_scale_moves++;
      checks++;
      if ((int'(tgt_cx) - ox) > 4 || (ox - int'(tgt_cx)) > 4 || (int'(tgt_cy) - oy) > 4 || (oy - int'(tgt_cy)) > 4) begin
        failures++;
        $display("FAIL frame %0d: target %0d,%0d true %0d,%0d", f, tgt_cx, tgt_cy, ox, oy);
      end
      $display("frame %0d: target (%0d,%0d) true (%0d,%0d) scale %0d best_n %0d, %0d cycles",
               f, tgt_cx, tgt_cy, ox, oy, tgt_scale, tgt_best_n, cyc_frame);
    end
    $display("mechanisms: gauss=%0d first_train=%0d batches=%0d inverse=%0d candidates=%0d updates=%0d recips=%0d skipped=%0d boxpix=%0d",
             n_gauss, n_first, n_batch, n_inv, n_cand, n_update, n_recip, n_skipped, n_boxpix);
    checks++; if (n_gauss != 1) failures++;
    checks++; if (n_first != 1) failures++;
    checks++; if (n_cand != 7 * n_frames) failures++;
    checks++; if (n_batch != 8 * (n_cand + n_first + n_update)) failures++;
    checks++; if (n_inv != n_cand) failures++;
    checks++; if (n_update != n_frames) failures++;
    checks++; if (n_recip != 1024 * (n_first + n_update)) failures++;
    checks++; if (n_skipped == 0) failures++;
    checks++; if (n_boxpix == 0) failures++;
    checks++; if (n_scale_moves == 0) failures++;
    // 153 frames/s at an assumed 200 MHz clock leaves 1,307,189 cycles per frame
    checks++; if (proc_max > 1307189) failures++;
    $display("scale moves=%0d, longest processing %0d cycles", n_scale_moves, proc_max);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (12000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
