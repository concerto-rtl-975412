// band_manager -- one 100 MHz subband: NT tone managers, two pipelined adders and a band gain.
//
// Generation: each tone manager synthesizes one tone at 250 MSPS from its frequency control
// word; the NT attenuated cosines are summed into the band's I and the NT sines into its Q by
// two pipelined adder trees, and the band gain scales the sums to 16 bits. The band signal
// I + jQ holds the tones at +fcw/PERIOD * 250 MHz, i.e. in the 0..125 MHz half of the band
// clock (the source places a band at 12.5..112.5 MHz before the down-shifter).
// Analysis: the band's analysis channel (12 bits, 250 MSPS, from the polyphase filter bank) is
// fanned out to all NT tone analyzers, each demodulating it with its own tone's square waves and
// averaging over the window framed by win_last.
//
// Note on I/Q naming: the source's text calls the CORDIC's cosine I and its sine Q, while its
// band-manager diagram draws the sines into the adder labelled I. This design follows the text.
//
// Timing: band output = FCW -> phase (1) -> CORDIC (ITER+2) -> attenuator (1) -> adder tree
// (ceil(log2 NT)) -> band gain (1). Tone results appear 2 clocks after win_last, all tones of
// the band together, flagged by iq_valid.
module band_manager
  import concerto_pkg::*;
#(
  parameter int unsigned NT      = TONES_PER_BAND,
  parameter int unsigned MODULUS = PERIOD,
  parameter int unsigned OUT_W   = CORDIC_W,
  parameter int unsigned ITER    = CORDIC_ITER
) (
  input  logic      clk,
  input  logic      rst_n,
  // configuration
  input  fcw_t      fcw      [NT],
  input  gainsel_t  gain_sel [NT],
  input  bandgain_t band_gain,
  // generated band, 250 MSPS
  output band_iq_t  band_out,
  output logic      band_sat,
  output logic      phase_wrap,        // tone 0's phase accumulator wrapped
  // analysis
  input  chan_s_t   chan_in,
  input  logic      win_last,
  output iq_s_t     iq_i     [NT],
  output iq_s_t     iq_q     [NT],
  output logic      iq_valid
);

  localparam int unsigned SUM_W = OUT_W + ((NT > 1) ? $clog2(NT) : 1);

  logic signed [OUT_W-1:0] gen_i [NT];
  logic signed [OUT_W-1:0] gen_q [NT];
  logic                    wrap  [NT];
  logic                    valid [NT];

  for (genvar t = 0; t < int'(NT); t++) begin : g_tone
    tone_manager #(.MODULUS(MODULUS), .OUT_W(OUT_W), .ITER(ITER)) u_tone (
      .clk, .rst_n,
      .fcw(fcw[t]), .gain_sel(gain_sel[t]),
      .gen_i(gen_i[t]), .gen_q(gen_q[t]), .phase_wrap(wrap[t]),
      .chan_in, .win_last,
      .iq_i(iq_i[t]), .iq_q(iq_q[t]), .iq_valid(valid[t])
    );
  end

  assign iq_valid   = valid[0];
  assign phase_wrap = wrap[0];

  logic signed [SUM_W-1:0] sum_i, sum_q;

  pipelined_adder #(.N(NT), .W(OUT_W)) u_add_i (.clk, .rst_n, .din(gen_i), .sum(sum_i));
  pipelined_adder #(.N(NT), .W(OUT_W)) u_add_q (.clk, .rst_n, .din(gen_q), .sum(sum_q));

  band_gain #(.IN_W(SUM_W), .OUT_W(BAND_W), .G_W(BANDGAIN_W)) u_gain (
    .clk, .rst_n, .gain(band_gain), .i_in(sum_i), .q_in(sum_q),
    .i_out(band_out.i), .q_out(band_out.q), .sat(band_sat)
  );

endmodule
