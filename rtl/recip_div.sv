// recip_div: sequential reciprocal, q = floor(2^RS / d), one bit per clock.
//
// Restoring division of the constant 2^RS by d. start (when idle) latches
// d; done pulses RS+1 clocks later with q valid until the next start.
// Used to turn the filter denominators B + lambda into multipliers once
// per model update, so detection needs no divider.
module recip_div #(
  parameter int unsigned DWID = 40,   // divisor width
  parameter int unsigned RS   = 48,   // numerator exponent
  parameter int unsigned QW   = 48    // quotient width
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [DWID-1:0] d,
  output logic [QW-1:0]   q,
  output logic            busy,
  output logic            done
);
  logic [DWID:0]   rem;
  logic [DWID-1:0] dd;
  logic [7:0]      i;
  logic [DWID:0]   trial;
  logic            nbit;

  assign nbit  = (i == 8'(RS));              // the single 1 of 2^RS
  assign trial = {rem[DWID-1:0], nbit};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem <= '0; dd <= '0; i <= '0; q <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1; dd <= d; rem <= '0; q <= '0; i <= 8'(RS);
        end
      end else begin
        if (trial >= {1'b0, dd}) begin
          rem <= trial - {1'b0, dd};
          q   <= {q[QW-2:0], 1'b1};
        end else begin
          rem <= trial;
          q   <= {q[QW-2:0], 1'b0};
        end
        if (i == 8'd0) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        i <= i - 8'd1;
      end
    end
  end
endmodule
