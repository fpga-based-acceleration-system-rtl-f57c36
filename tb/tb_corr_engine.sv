// tb_corr_engine: self-checking test of the batch correlation filter.
// A random 33-channel 32x32 feature map f is learned (GAUSS, then TRAIN
// with eta = 1). Detecting on f itself must give both response peaks at
// (0,0); detecting on f circularly shifted by (dy,dx) must put them at
// (dy mod 32, dx mod 32), which is what the correlation theorem predicts
// independently of the hardware. After a normal-rate TRAIN on the shifted
// map the peak for the shifted map must remain there. DETECT must finish
// within 100,000 cycles (8 batches plus one inverse transform).
module tb_corr_engine;
  import trk_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_start = 0, cmd_first = 0;
  eng_mode_e cmd_mode = ENG_GAUSS;
  logic [9:0] feat_raddr, resp_idx;
  feat_word_t feat_rdata;
  logic resp_valid, busy, done;
  logic signed [DW-1:0] resp_pos, resp_scale;
  int checks = 0, failures = 0;

  corr_engine dut (.*);

  feat_word_t base [MAPSZ];
  feat_word_t fmem [MAPSZ];
  assign feat_rdata = fmem[feat_raddr];

  logic signed [DW-1:0] best_p, best_s;
  int idx_p, idx_s, cycles;

  task automatic cmd(input eng_mode_e m, input logic f);
    @(negedge clk); cmd_start = 1; cmd_mode = m; cmd_first = f;
    @(negedge clk); cmd_start = 0;
    cycles = 1; best_p = -(1 <<< (DW-1)); best_s = -(1 <<< (DW-1)); idx_p = -1; idx_s = -1;
    while (!done) begin
      @(posedge clk);
      if (resp_valid) begin
        if (resp_pos > best_p)   begin best_p = resp_pos;   idx_p = int'(resp_idx); end
        if (resp_scale > best_s) begin best_s = resp_scale; idx_s = int'(resp_idx); end
      end
      cycles++;
      @(negedge clk);
    end
  endtask

  task automatic shift_map(input int dy, input int dx);
    for (int y = 0; y < 32; y++)
      for (int x = 0; x < 32; x++)
        fmem[y*32 + x] = base[((y - dy + 32) % 32) * 32 + ((x - dx + 32) % 32)];
  endtask

  task automatic expect_peak(input int dy, input int dx, input string what);
    int e;
    e = ((dy + 32) % 32) * 32 + ((dx + 32) % 32);
    checks++;
    if (idx_p != e) begin failures++; $display("FAIL %s: position peak at %0d, expected %0d", what, idx_p, e); end
    checks++;
    if (idx_s != e) begin failures++; $display("FAIL %s: scale peak at %0d, expected %0d", what, idx_s, e); end
    $display("%s: peaks %0d / %0d (values %0d / %0d), expected %0d, %0d cycles", what, idx_p, idx_s,
             best_p, best_s, e, cycles);
  endtask

  initial begin
    // smooth-ish random features: a few random blobs per channel plus noise
    for (int i = 0; i < MAPSZ; i++)
      for (int c = 0; c < NCH; c++)
        base[i][c] = FW'(int'($urandom_range(0, 3000)) - 1500);
    fmem = base;
    repeat (3) @(negedge clk); rst_n = 1;
    cmd(ENG_GAUSS, 1'b0);
    cmd(ENG_TRAIN, 1'b1);
    $display("TRAIN took %0d cycles", cycles);
    shift_map(0, 0);
    cmd(ENG_DETECT, 1'b0);
    expect_peak(0, 0, "unshifted");
    checks++; if (cycles > 100000) begin failures++; $display("FAIL detect too slow"); end
    shift_map(3, -5);
    cmd(ENG_DETECT, 1'b0);
    expect_peak(3, -5, "shift (3,-5)");
    shift_map(-7, 11);
    cmd(ENG_DETECT, 1'b0);
    expect_peak(-7, 11, "shift (-7,11)");
    // learn the shifted map at the normal rate, then detect it again
    cmd(ENG_TRAIN, 1'b0);
    cmd(ENG_DETECT, 1'b0);
    expect_peak(-7, 11, "after update");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
