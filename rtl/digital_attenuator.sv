// digital_attenuator -- per-tone amplitude control of one CORDIC output.
//
// Each tone of the comb has its own amplitude setting (gainSelect). The source names the block
// and its control input but not its law; this design uses the simplest multiplier-free law, a
// right shift of the magnitude: out = sign(in) * (|in| >> gain_sel), i.e. 6 dB steps with
// 0 = full amplitude. Shifting the magnitude (rounding toward zero) keeps the tone free of a DC
// offset and lets a large setting mute the tone completely (|in| <= 31 for 6 bits, so any
// gain_sel >= 5 gives 0). Registered: latency one clock. Width in = width out; the input is a
// CORDIC output and never holds the most negative code.
module digital_attenuator
  import concerto_pkg::*;
#(
  parameter int unsigned W   = CORDIC_W,
  parameter int unsigned G_W = GAINSEL_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [G_W-1:0]      gain_sel,
  input  logic signed [W-1:0] din,
  output logic signed [W-1:0] dout
);

  logic [W-1:0] mag, mag_sh;

  always_comb begin
    mag    = din[W-1] ? W'(-din) : W'(din);
    mag_sh = mag >> gain_sel;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dout <= '0;
    else        dout <= din[W-1] ? -signed'(mag_sh) : signed'(mag_sh);
  end

endmodule
