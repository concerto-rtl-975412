// tone_manager -- one tone of the comb: its tone generator and its tone analyzer.
//
// The generator produces the attenuated excitation cosine/sine (gen_i, gen_q) for the band
// adders. The analyzer demodulates the band's analysis channel with the MSBs of the same
// CORDIC's unattenuated outputs, i.e. with square waves at exactly the excitation frequency,
// and averages over the window framed by win_last. Latencies are those of the two sub-blocks.
module tone_manager
  import concerto_pkg::*;
#(
  parameter int unsigned MODULUS = PERIOD,
  parameter int unsigned OUT_W   = CORDIC_W,
  parameter int unsigned ITER    = CORDIC_ITER
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  fcw_t                    fcw,
  input  gainsel_t                gain_sel,
  output logic signed [OUT_W-1:0] gen_i,
  output logic signed [OUT_W-1:0] gen_q,
  output logic                    phase_wrap,
  input  chan_s_t                 chan_in,
  input  logic                    win_last,
  output iq_s_t                   iq_i,
  output iq_s_t                   iq_q,
  output logic                    iq_valid
);

  logic signed [OUT_W-1:0] ref_cos, ref_sin;

  tone_generator #(.MODULUS(MODULUS), .OUT_W(OUT_W), .ITER(ITER)) u_gen (
    .clk, .rst_n, .fcw, .gain_sel, .ref_cos, .ref_sin,
    .i_out(gen_i), .q_out(gen_q), .phase_wrap
  );

  tone_analyzer u_ana (
    .clk, .rst_n, .chan_in,
    .ref_cos_msb(ref_cos[OUT_W-1]), .ref_sin_msb(ref_sin[OUT_W-1]),
    .win_last, .i_out(iq_i), .q_out(iq_q), .valid(iq_valid)
  );

endmodule
