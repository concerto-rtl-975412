// up_sampler -- x8 interpolation of a centred band from 250 MSPS to 2000 MSPS.
//
// Each 250 MHz clock takes one complex sample x(m) and produces 8 output samples at 2 GSPS, as
// 8 parallel lanes (lane 0 the oldest, lane 7 the newest, the source's X_up(n-7)..X_up(n)).
// The source gives the factor and rates but not the interpolation filter; this design uses the
// simplest one that fills the gaps, linear interpolation between x(m-1) and x(m):
//     lane k = ((7-k) * x(m-1) + (k+1) * x(m)) / 8,   k = 0..7   (lane 7 = x(m))
// which is zero-stuffing followed by a 15-tap triangular FIR. Constant weights, no multiplier
// needed in practice; the division is an arithmetic shift (rounds toward minus infinity).
// Timing: registered, output lanes at clock m+1 hold the interpolation between x(m-1) and x(m).
module up_sampler
  import concerto_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  band_iq_t din,
  output wb_iq_t   dout
);

  band_iq_t prev;

  function automatic wb_s_t interp(input band_s_t a, input band_s_t b, input int k);
    logic signed [BAND_W+4:0] acc;
    acc = (BAND_W+5)'(7 - k) * (BAND_W+5)'(a) + (BAND_W+5)'(k + 1) * (BAND_W+5)'(b);
    return WB_W'(acc >>> 3);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev <= '0;
      dout <= '0;
    end else begin
      prev <= din;
      for (int k = 0; k < int'(LANES); k++) begin
        dout.i[k] <= interp(prev.i, din.i, k);
        dout.q[k] <= interp(prev.q, din.q, k);
      end
    end
  end

endmodule
