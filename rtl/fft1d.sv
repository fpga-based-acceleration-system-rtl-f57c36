// fft1d: 32-point radix-2 FFT/IFFT core, one butterfly per clock.
//
// This is the single 1-D transform core that the 2-D transform (fft2d)
// time-multiplexes over rows and columns. It works in three phases:
//   LOAD : accepts 32 samples (in_valid & in_ready), stored in bit-reversed
//          order in an internal register file;
//   CALC : 5 decimation-in-time stages of 16 butterflies, one per cycle
//          (80 cycles); each stage halves its result, so the core returns
//          DFT(x)/32 and never overflows;
//   OUT  : presents the 32 results in natural order, one per cycle, with
//          out_idx = frequency index. There is no output back-pressure.
// An inverse transform uses conj(FFT(conj(x))): with the per-stage halving
// this gives exactly IDFT(x) = (1/32) sum x[k] e^{+j2pi nk/32}.
// Latency per transform: 32 + 80 + 32 = 144 cycles plus one cycle per phase
// change. The core and its scaling are this design's choice; the paper uses
// a vendor FFT core here.
module fft1d
  import trk_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  inverse,    // sampled with the first input sample
  input  logic  in_valid,
  input  cplx_t in_data,
  output logic  in_ready,
  output logic  out_valid,
  output cplx_t out_data,
  output logic [4:0] out_idx
);
  // cos / sin of 2*pi*m/32 in Q1.14, m = 0..15
  localparam logic signed [TW-1:0] COS_T [16] = '{
    16'sd16384, 16'sd16069, 16'sd15137, 16'sd13623, 16'sd11585, 16'sd9102, 16'sd6270, 16'sd3196,
    16'sd0, -16'sd3196, -16'sd6270, -16'sd9102, -16'sd11585, -16'sd13623, -16'sd15137, -16'sd16069};
  localparam logic signed [TW-1:0] SIN_T [16] = '{
    16'sd0, 16'sd3196, 16'sd6270, 16'sd9102, 16'sd11585, 16'sd13623, 16'sd15137, 16'sd16069,
    16'sd16384, 16'sd16069, 16'sd15137, 16'sd13623, 16'sd11585, 16'sd9102, 16'sd6270, 16'sd3196};

  typedef enum logic [1:0] {S_LOAD, S_CALC, S_OUT} state_e;
  state_e state;

  cplx_t      x [32];
  logic [4:0] cnt;       // sample / butterfly counter
  logic [2:0] stage;
  logic       inv_q;

  function automatic logic [4:0] bitrev5(logic [4:0] v);
    return {v[0], v[1], v[2], v[3], v[4]};
  endfunction

  // Butterfly indices for (stage, cnt[3:0]).
  logic [4:0] half, pos, bi, bj;
  logic [3:0] tw_idx;
  always_comb begin
    half   = 5'd1 << stage;
    pos    = {1'b0, cnt[3:0]} & (half - 5'd1);
    bi     = (({1'b0, cnt[3:0]} >> stage) << (stage + 3'd1)) | pos;
    bj     = bi | half;
    tw_idx = 4'(pos << (3'd4 - stage));
  end

  // t = x[j] * W, W = cos - j sin
  localparam int unsigned PW2 = DW + TW;
  logic signed [PW2-1:0] pr, pi;
  logic signed [DW:0]    tr, ti;
  logic signed [DW+1:0]  sr, si, dr, di;
  cplx_t                 yi, yj;
  always_comb begin
    pr = PW2'(x[bj].re) * PW2'(COS_T[tw_idx]) + PW2'(x[bj].im) * PW2'(SIN_T[tw_idx]);
    pi = PW2'(x[bj].im) * PW2'(COS_T[tw_idx]) - PW2'(x[bj].re) * PW2'(SIN_T[tw_idx]);
    tr = (DW+1)'((pr + PW2'(1 <<< 13)) >>> 14);
    ti = (DW+1)'((pi + PW2'(1 <<< 13)) >>> 14);
    sr = (DW+2)'(x[bi].re) + (DW+2)'(tr);
    si = (DW+2)'(x[bi].im) + (DW+2)'(ti);
    dr = (DW+2)'(x[bi].re) - (DW+2)'(tr);
    di = (DW+2)'(x[bi].im) - (DW+2)'(ti);
    yi.re = DW'(sr >>> 1);
    yi.im = DW'(si >>> 1);
    yj.re = DW'(dr >>> 1);
    yj.im = DW'(di >>> 1);
  end

  assign in_ready = (state == S_LOAD);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD;
      cnt   <= '0;
      stage <= '0;
      inv_q <= 1'b0;
    end else begin
      unique case (state)
        S_LOAD: if (in_valid) begin
          if (cnt == 5'd0) inv_q <= inverse;
          cnt <= cnt + 5'd1;
          if (cnt == 5'd31) begin
            state <= S_CALC;
            cnt   <= '0;
            stage <= '0;
          end
        end
        S_CALC: begin
          if (cnt[3:0] == 4'd15) begin
            cnt <= '0;
            if (stage == 3'd4) state <= S_OUT;
            else               stage <= stage + 3'd1;
          end else begin
            cnt <= cnt + 5'd1;
          end
        end
        S_OUT: begin
          cnt <= cnt + 5'd1;
          if (cnt == 5'd31) state <= S_LOAD;
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_LOAD && in_valid) begin
      x[bitrev5(cnt)].re <= in_data.re;
      x[bitrev5(cnt)].im <= ((cnt == 5'd0) ? inverse : inv_q) ? -in_data.im : in_data.im;
    end else if (state == S_CALC) begin
      x[bi] <= yi;
      x[bj] <= yj;
    end
  end

  assign out_valid   = (state == S_OUT);
  assign out_idx     = cnt;
  assign out_data.re = x[cnt].re;
  assign out_data.im = inv_q ? -x[cnt].im : x[cnt].im;
endmodule
