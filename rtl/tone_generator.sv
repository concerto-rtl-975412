// tone_generator -- one excitation tone: phase accumulator, CORDIC and two digital attenuators.
//
// The phase accumulator (modulus PERIOD, 65520 in the optimized firmware) feeds the CORDIC,
// which produces the tone's cosine (I) and sine (Q). Two digital attenuators scale them by the
// tone's gain select before they go to the band's adders. The unattenuated CORDIC outputs are
// also brought out (ref_cos, ref_sin): the tone analyzer of the same tone uses their sign bits
// as square-wave demodulation references. Structure as in the source's band manager diagram.
//
// Timing: the phase register adds one clock, the CORDIC ITER+2 clocks, the attenuators one more.
// ref_* are valid CORDIC_LAT = ITER+3 clocks after the FCW was added; i_out/q_out one clock
// later. Everything runs every clock (250 MSPS), no stalls.
module tone_generator
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
  output logic signed [OUT_W-1:0] ref_cos,
  output logic signed [OUT_W-1:0] ref_sin,
  output logic signed [OUT_W-1:0] i_out,
  output logic signed [OUT_W-1:0] q_out,
  output logic                    phase_wrap
);

  fcw_t phase;
  logic cordic_valid;

  phase_accumulator #(.W(FCW_W), .MODULUS(MODULUS)) u_acc (
    .clk, .rst_n, .en(1'b1), .fcw, .phase, .wrap(phase_wrap)
  );

  cordic #(.OUT_W(OUT_W), .ITER(ITER)) u_cordic (
    .clk, .rst_n, .valid_in(1'b1), .angle(phase),
    .valid_out(cordic_valid), .cos_out(ref_cos), .sin_out(ref_sin)
  );

  digital_attenuator #(.W(OUT_W), .G_W(GAINSEL_W)) u_att_i (
    .clk, .rst_n, .gain_sel, .din(ref_cos), .dout(i_out)
  );

  digital_attenuator #(.W(OUT_W), .G_W(GAINSEL_W)) u_att_q (
    .clk, .rst_n, .gain_sel, .din(ref_sin), .dout(q_out)
  );

  // cordic_valid only marks the end of the pipeline fill after reset
  logic unused_valid;
  assign unused_valid = cordic_valid;

endmodule
