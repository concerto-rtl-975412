// tone_analyzer -- square-wave demodulator and averaging filter for one tone.
//
// The analysis channel sample (PFB channel output, 12 bits at 250 MSPS) is mixed with the sign
// of the tone's own reference cosine and sine, taken from the CORDIC of the tone generator: the
// MSB of each reference says whether it is in its negative half-cycle, and the sample is then
// negated, otherwise passed unchanged. This is multiplication by a +-1 square wave and needs no
// multiplier (the source's optimized firmware; the original used two multipliers per tone).
// Each mixed stream is summed in a 48-bit accumulator over a window of PERIOD = 65520 samples
// (the averaging filter, "48 bit acc"), and one sum per window is output ("R down", 32 bits),
// so the output rate is 250 MHz / 65520 = 3815.6 Hz.
//
// Interface: `win_last` marks the last sample of an averaging window (from a shared window
// counter); it must be aligned with chan_in and the ref MSBs. Outputs i_out (cosine channel) and
// q_out (sine channel) are the window sums bits [OUT_LSB +: IQ_W]; OUT_LSB = 0 is this design's
// own choice: with +-1 mixing a 65520-sample sum of 12-bit samples needs at most 29 bits, so the
// low 32 bits hold it exactly. `valid` pulses for one clock per window.
// Timing: mixing is registered (1 clock), the window sum leaves 1 clock after the mixed last
// sample, i.e. valid comes 2 clocks after win_last is presented.
module tone_analyzer
  import concerto_pkg::*;
#(
  parameter int unsigned IN_W    = CHAN_W,
  parameter int unsigned AW      = ACC_W,
  parameter int unsigned OW      = IQ_W,
  parameter int unsigned OUT_LSB = 0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic signed [IN_W-1:0] chan_in,
  input  logic                  ref_cos_msb,
  input  logic                  ref_sin_msb,
  input  logic                  win_last,
  output logic signed [OW-1:0]  i_out,
  output logic signed [OW-1:0]  q_out,
  output logic                  valid
);

  // Square-wave mixing: conditional sign inversion
  logic signed [IN_W:0] mix_i, mix_q;
  logic                 mix_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mix_i    <= '0;
      mix_q    <= '0;
      mix_last <= 1'b0;
    end else begin
      mix_i    <= ref_cos_msb ? -(IN_W+1)'(chan_in) : (IN_W+1)'(chan_in);
      mix_q    <= ref_sin_msb ? -(IN_W+1)'(chan_in) : (IN_W+1)'(chan_in);
      mix_last <= win_last;
    end
  end

  // Averaging accumulators with dump-and-restart
  logic signed [AW-1:0] acc_i, acc_q, sum_i, sum_q;
  assign sum_i = acc_i + AW'(mix_i);
  assign sum_q = acc_q + AW'(mix_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_i <= '0;
      acc_q <= '0;
      i_out <= '0;
      q_out <= '0;
      valid <= 1'b0;
    end else begin
      valid <= mix_last;
      if (mix_last) begin
        i_out <= sum_i[OUT_LSB +: OW];
        q_out <= sum_q[OUT_LSB +: OW];
        acc_i <= '0;
        acc_q <= '0;
      end else begin
        acc_i <= sum_i;
        acc_q <= sum_q;
      end
    end
  end

endmodule
