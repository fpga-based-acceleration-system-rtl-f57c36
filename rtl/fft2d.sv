// fft2d: 32x32 2-D FFT / IFFT built from one time-multiplexed 1-D core.
//
// Following the "after optimization" structure of the paper's FFT2 figure,
// a single fft1d core first transforms the 32 rows as they stream in; its
// outputs go to a 32x32 transpose RAM. The RAM is then read out column by
// column and fed back into the same core, whose outputs leave the block.
// The same block serves as IFFT2 when `inverse` is set at `start`.
//   start    : one-cycle pulse, latches `inverse`; the block must be idle
//   in_*     : 1024 samples in raster order (row-major), valid/ready handshake
//   out_*    : 1024 results, column by column; out_idx = v*32 + u where v is
//              the vertical (row) frequency and u the horizontal one
//   done     : one-cycle pulse with the last output
// Scaling: forward gives DFT2/1024, inverse gives IDFT2 exactly.
// Timing: 64 one-dimensional transforms of about 146 cycles, ~9.4k cycles.
module fft2d
  import trk_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  logic  inverse,
  input  logic  in_valid,
  input  cplx_t in_data,
  output logic  in_ready,
  output logic  out_valid,
  output cplx_t out_data,
  output logic [9:0] out_idx,
  output logic  done,
  output logic  busy
);
  typedef enum logic [1:0] {P_IDLE, P_ROW, P_COL} phase_e;
  phase_e phase;
  logic   inv_q;

  logic       core_in_valid, core_in_ready, core_out_valid;
  cplx_t      core_in, core_out;
  logic [4:0] core_out_idx;

  logic [4:0] row_out;   // row whose results the core is returning
  logic [4:0] col_in;    // column being fed in
  logic [4:0] col_rd;    // row index within the fed column
  logic [4:0] col_out;   // column whose results are leaving
  logic       col_feed_done;

  // transpose RAM, address = row*32 + col
  logic       t_we;
  logic [9:0] t_waddr, t_raddr;
  cplx_t      t_rdata;
  sdp_ram #(.WIDTH(2*DW), .DEPTH(MAPSZ)) u_tram (
    .clk, .we(t_we), .waddr(t_waddr), .wdata(core_out),
    .raddr(t_raddr), .rdata(t_rdata));

  assign t_we    = (phase == P_ROW) && core_out_valid;
  assign t_waddr = {row_out, core_out_idx};
  assign t_raddr = {col_rd, col_in};

  always_comb begin
    core_in_valid = 1'b0;
    core_in       = in_data;
    if (phase == P_ROW) begin
      core_in_valid = in_valid;
    end else if (phase == P_COL) begin
      core_in_valid = !col_feed_done;
      core_in       = t_rdata;
    end
  end
  assign in_ready = (phase == P_ROW) && core_in_ready;
  assign busy     = (phase != P_IDLE);

  fft1d u_core (
    .clk, .rst_n, .inverse(inv_q),
    .in_valid(core_in_valid), .in_data(core_in), .in_ready(core_in_ready),
    .out_valid(core_out_valid), .out_data(core_out), .out_idx(core_out_idx));

  assign out_valid = (phase == P_COL) && core_out_valid;
  assign out_data  = core_out;
  assign out_idx   = {core_out_idx, col_out};
  assign done      = out_valid && (col_out == 5'd31) && (core_out_idx == 5'd31);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase         <= P_IDLE;
      inv_q         <= 1'b0;
      row_out       <= '0;
      col_in        <= '0;
      col_rd        <= '0;
      col_out       <= '0;
      col_feed_done <= 1'b0;
    end else begin
      unique case (phase)
        P_IDLE: if (start) begin
          phase         <= P_ROW;
          inv_q         <= inverse;
          row_out       <= '0;
          col_in        <= '0;
          col_rd        <= '0;
          col_out       <= '0;
          col_feed_done <= 1'b0;
        end
        P_ROW: if (core_out_valid && core_out_idx == 5'd31) begin
          row_out <= row_out + 5'd1;
          if (row_out == 5'd31) phase <= P_COL;
        end
        P_COL: begin
          if (core_in_valid && core_in_ready) begin
            col_rd <= col_rd + 5'd1;
            if (col_rd == 5'd31) begin
              col_in <= col_in + 5'd1;
              if (col_in == 5'd31) col_feed_done <= 1'b1;
            end
          end
          if (core_out_valid && core_out_idx == 5'd31) begin
            col_out <= col_out + 5'd1;
            if (col_out == 5'd31) phase <= P_IDLE;
          end
        end
        default: phase <= P_IDLE;
      endcase
    end
  end

  // The core must only be started from idle.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> phase == P_IDLE);
endmodule
