// peak_find: maximum of a streamed response map and its position.
//
// clear (pulse) resets the search; every in_valid sample is compared with
// the running maximum and replaces it when strictly larger, so the first of
// equal maxima wins. peak_val/peak_idx are valid one cycle after the last
// sample. Used for the position peak and for the peak of each scale's
// response ("searching the peak value of responses").
module peak_find
  import trk_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 in_valid,
  input  logic [9:0]           in_idx,
  input  logic signed [DW-1:0] in_val,
  output logic signed [DW-1:0] peak_val,
  output logic [9:0]           peak_idx,
  output logic                 found
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      peak_val <= '0; peak_idx <= '0; found <= 1'b0;
    end else if (clear) begin
      peak_val <= '0; peak_idx <= '0; found <= 1'b0;
    end else if (in_valid && (!found || in_val > peak_val)) begin
      peak_val <= in_val;
      peak_idx <= in_idx;
      found    <= 1'b1;
    end
  end
endmodule
