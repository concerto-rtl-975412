// kid_readout_dsp -- digital comb generator and analyzer of one MKID feedline readout.
//
// Generator: NB band managers each synthesize NT tones (phase accumulator modulo PERIOD, 6-bit
// 3-iteration CORDIC, per-tone attenuation, adder trees, band gain) at 250 MSPS. Each band is
// recentred (down_shifter), interpolated x8 to 2 GSPS (up_sampler, 8 lanes per clock), moved to
// 100*b .. 100*(b+1) MHz (band_shifter) and all bands are summed (band_adder) into dac_out, the
// 0..1 GHz comb for the DAC interface.
// Analyzer: the analysis input is either adc_in (normal operation, from the ADC interface) or,
// with loopback_en = 1, dac_out itself (the source's fully digital "Setup 1" loopback). The
// polyphase filter bank splits it into NB 12-bit channels; in each band manager every tone
// analyzer demodulates its channel with square waves derived from its own tone's CORDIC and
// averages over PERIOD samples. All NB*NT I/Q results (32 bits) are presented together with a
// one-clock iq_valid once per window, i.e. every PERIOD clocks (3815.6 Hz at 250 MHz).
// What follows the source: the chain of blocks, the band plan, the modulus 65520 shared by phase
// accumulators and averaging filters, the CORDIC size, square-wave demodulation, the widths
// 16/12/48/32. This design's own: the I/Q and configuration ports replacing the PC link and
// registers, the loopback multiplexer register, the interpolator and channelizer filters, gain
// laws, and a single window counter for all tones.
// Timing: one clock domain (250 MHz). Register stages from the phase register to dac_out:
// CORDIC ITER+2, attenuator 1, adder tree 6 (40 tones), band gain 1, then down-shifter,
// up-sampler, band shifter and band adder 1 each. dac_out to analysis channel: 1 (loopback
// register) + 3 (filter bank).
module kid_readout_dsp
  import concerto_pkg::*;
#(
  parameter int unsigned NB      = NBANDS,
  parameter int unsigned NT      = TONES_PER_BAND,
  parameter int unsigned MODULUS = PERIOD,
  parameter int unsigned OUT_W   = CORDIC_W,
  parameter int unsigned ITER    = CORDIC_ITER
) (
  input  logic            clk,
  input  logic            rst_n,
  // configuration (written by the host in the real system)
  input  fcw_t            fcw       [NB][NT],
  input  gainsel_t        gain_sel  [NB][NT],
  input  bandgain_t       band_gain [NB],
  input  logic            loopback_en,
  // converters
  output wb_iq_t          dac_out,
  input  wb_iq_t          adc_in,
  // results to the host
  output iq_s_t           iq_i      [NB][NT],
  output iq_s_t           iq_q      [NB][NT],
  output logic            iq_valid,
  // status
  output logic [NB-1:0]   band_sat,
  output logic            phase_wrap
);

  band_iq_t band_raw     [NB];
  band_iq_t band_centred [NB];
  wb_iq_t   band_up      [NB];
  wb_iq_t   band_shifted [NB];
  chan_s_t  chan         [NB];
  logic     bm_valid     [NB];
  logic     bm_wrap      [NB];
  logic     win_last;
  logic [15:0] win_count;
  wb_iq_t   ana_in;

  avg_window_counter #(.LEN(MODULUS)) u_win (
    .clk, .rst_n, .count(win_count), .win_last
  );

  for (genvar b = 0; b < int'(NB); b++) begin : g_band
    band_manager #(.NT(NT), .MODULUS(MODULUS), .OUT_W(OUT_W), .ITER(ITER)) u_bm (
      .clk, .rst_n,
      .fcw(fcw[b]), .gain_sel(gain_sel[b]), .band_gain(band_gain[b]),
      .band_out(band_raw[b]), .band_sat(band_sat[b]), .phase_wrap(bm_wrap[b]),
      .chan_in(chan[b]), .win_last,
      .iq_i(iq_i[b]), .iq_q(iq_q[b]), .iq_valid(bm_valid[b])
    );

    down_shifter u_ds (.clk, .rst_n, .din(band_raw[b]), .dout(band_centred[b]));

    up_sampler u_us (.clk, .rst_n, .din(band_centred[b]), .dout(band_up[b]));

    band_shifter #(.BAND(b)) u_bs (.clk, .rst_n, .din(band_up[b]), .dout(band_shifted[b]));
  end

  assign iq_valid   = bm_valid[0];
  assign phase_wrap = bm_wrap[0];

  band_adder #(.NB(NB)) u_add (.clk, .rst_n, .din(band_shifted), .dout(dac_out));

  // Analysis input select: external ADC data or digital loopback of the generated comb
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ana_in <= '0;
    else        ana_in <= loopback_en ? dac_out : adc_in;
  end

  polyphase_filter_bank #(.NB(NB)) u_pfb (.clk, .rst_n, .din(ana_in), .chan_out(chan));

  // The window position is internal to the counter's users
  logic [15:0] unused_count;
  assign unused_count = win_count;

endmodule
