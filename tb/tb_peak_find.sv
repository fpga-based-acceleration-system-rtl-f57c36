// tb_peak_find: random response maps with a planted maximum (sometimes
// negative-valued maps, sometimes ties); the reported peak must be the
// first position of the maximum value, tracked independently here.
module tb_peak_find;
  import trk_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, in_valid, found;
  logic [9:0] in_idx, peak_idx;
  logic signed [DW-1:0] in_val, peak_val;
  int checks = 0, failures = 0;

  peak_find dut (.*);

  initial begin
    clear = 0; in_valid = 0; in_idx = 0; in_val = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      int best, bidx, off;
      off = (t % 2) ? -3000000 : 0;
      clear = 1; @(negedge clk); clear = 0;
      best = -(1 << 30); bidx = -1;
      for (int i = 0; i < 1024; i++) begin
        int v;
        v = int'($urandom_range(0, 100000)) + off;
        if (i == (t * 97) % 1024) v = 200000 + off;
        if (t % 4 == 2 && i == 1000) v = 200000 + off;   // a tie later on
        in_valid = ($urandom_range(0, 4) != 0);
        in_idx = 10'(i); in_val = DW'(v);
        if (in_valid && v > best) begin best = v; bidx = i; end
        @(negedge clk);
        if (!in_valid) i--;
      end
      in_valid = 0; @(negedge clk);
      checks++;
      if (int'(peak_idx) != bidx || int'(peak_val) != best || !found) begin
        failures++; $display("FAIL map %0d: %0d@%0d expected %0d@%0d", t, peak_val, peak_idx, best, bidx);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
