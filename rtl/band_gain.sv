// band_gain -- scales a band's I/Q sums to the 16-bit band output.
//
// The source names the block ("Band gain", 16-bit outputs) without its law. This design uses a
// power-of-two gain: out = saturate(in <<< gain), gain 0..15, clipping to +-(2^15-1) rather than
// wrapping. `sat` flags a clock in which either output was clipped. Registered, latency 1 clock.
module band_gain
  import concerto_pkg::*;
#(
  parameter int unsigned IN_W  = CORDIC_W + 6,
  parameter int unsigned OUT_W = BAND_W,
  parameter int unsigned G_W   = BANDGAIN_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [G_W-1:0]          gain,
  input  logic signed [IN_W-1:0]  i_in,
  input  logic signed [IN_W-1:0]  q_in,
  output logic signed [OUT_W-1:0] i_out,
  output logic signed [OUT_W-1:0] q_out,
  output logic                    sat
);

  localparam int unsigned XW = IN_W + 2 ** G_W;   // wide enough for any shift
  localparam int MAXV = 2 ** (OUT_W - 1) - 1;

  logic signed [XW-1:0] i_x, q_x;
  logic                 i_hi, i_lo, q_hi, q_lo;

  always_comb begin
    i_x  = XW'(i_in) <<< gain;
    q_x  = XW'(q_in) <<< gain;
    i_hi = i_x >  XW'(MAXV);
    i_lo = i_x < -XW'(MAXV);
    q_hi = q_x >  XW'(MAXV);
    q_lo = q_x < -XW'(MAXV);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i_out <= '0;
      q_out <= '0;
      sat   <= 1'b0;
    end else begin
      i_out <= i_hi ? OUT_W'(MAXV) : i_lo ? OUT_W'(-MAXV) : OUT_W'(i_x);
      q_out <= q_hi ? OUT_W'(MAXV) : q_lo ? OUT_W'(-MAXV) : OUT_W'(q_x);
      sat   <= i_hi | i_lo | q_hi | q_lo;
    end
  end

endmodule
