// down_shifter -- recentres a band from 12.5..112.5 MHz to -50..+50 MHz at 250 MSPS.
//
// The band's centre, 62.5 MHz, is exactly a quarter of the 250 MHz sample rate, so the shift is
// a multiplication by exp(-j*pi/2*n) = (-j)^n: per sample a rotation by 0, -90, -180 or -270
// degrees, i.e. swaps and negations of I and Q with no multiplier. The source gives the block's
// function and its frequency plan (Fig. 2); the quarter-rate rotation follows from those numbers
// and is this design's implementation. A 2-bit counter, reset to 0, tracks n mod 4.
// Inputs are assumed not to hold -2^15 (the band gain clamps to +-(2^15-1)), so negation is exact.
// Timing: registered, latency 1 clock, one sample per clock.
module down_shifter
  import concerto_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  band_iq_t din,
  output band_iq_t dout
);

  logic [1:0] n;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n    <= '0;
      dout <= '0;
    end else begin
      n <= n + 2'd1;
      unique case (n)
        2'd0: begin dout.i <=  din.i; dout.q <=  din.q; end   // x 1
        2'd1: begin dout.i <=  din.q; dout.q <= -din.i; end   // x -j
        2'd2: begin dout.i <= -din.i; dout.q <= -din.q; end   // x -1
        2'd3: begin dout.i <= -din.q; dout.q <=  din.i; end   // x +j
      endcase
    end
  end

endmodule
