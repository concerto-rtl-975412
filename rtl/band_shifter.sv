// band_shifter -- moves one upsampled band to its place in the 0..1 GHz comb.
//
// Band b is multiplied by exp(+j*2*pi*(50 + 100*b)/2000 * j) for 2 GSPS sample index j, which
// moves its -50..+50 MHz content to 100*b .. 100*(b+1) MHz. Since (50 + 100*b)/2000 =
// (1 + 2*b)/40, all ten bands read one 40-sample sine/cosine table (as in the source) with an
// index step of 1 + 2*b per sample. With 8 samples per clock the table index pattern repeats
// every 5 clocks: this 8 x 5 = 40-sample period is what the source identifies as one cause of
// the spurs when combined with 2^16-periodic tones. Lane k of clock t reads index
// (base(t) + k*step) mod 40, base(t+1) = (base(t) + 8*step) mod 40, base reset to 0.
// Complex multiply (I + jQ)(C + jS), products rounded by 2^-15 and clamped to 16 bits.
// Timing: registered, latency 1 clock. BAND is the band number 0..9.
module band_shifter
  import concerto_pkg::*;
#(
  parameter int unsigned BAND = 0
) (
  input  logic   clk,
  input  logic   rst_n,
  input  wb_iq_t din,
  output wb_iq_t dout
);

  localparam int unsigned STEP = band_step(BAND);

  localparam int unsigned RW   = WB_W + LUT_W + 1;             // product width
  localparam int unsigned ADV  = (LANES * STEP) % LUT_LEN;        // base advance per clock
  localparam int          MAXV = 2 ** (WB_W - 1) - 1;

  logic [5:0] base;
  wb_iq_t     prod;

  // (a + b) mod 40 for a, b < 40
  function automatic logic [5:0] add40(input logic [5:0] a, input logic [5:0] b);
    logic [6:0] t;
    t = 7'(a) + 7'(b);
    return (t >= 7'(LUT_LEN)) ? 6'(t - 7'(LUT_LEN)) : 6'(t);
  endfunction

  function automatic wb_s_t round_sat(input logic signed [RW-1:0] p);
    logic signed [RW-1:0] r;
    r = (p + RW'(2 ** (LUT_W - 2))) >>> (LUT_W - 1);
    if (r > RW'(MAXV))       return WB_W'(MAXV);
    else if (r < -RW'(MAXV)) return WB_W'(-MAXV);
    else                     return WB_W'(r);
  endfunction

  always_comb begin
    for (int k = 0; k < int'(LANES); k++) begin
      logic [5:0]              idx_s, idx_c;
      logic signed [LUT_W-1:0] s, c;
      idx_s = add40(base, 6'((k * STEP) % LUT_LEN));
      idx_c = add40(idx_s, 6'(LUT_LEN / 4));         // cos(x) = sin(x + quarter period)
      s = SIN_LUT[idx_s];
      c = SIN_LUT[idx_c];
      prod.i[k] = round_sat(RW'(din.i[k]) * RW'(c) - RW'(din.q[k]) * RW'(s));
      prod.q[k] = round_sat(RW'(din.i[k]) * RW'(s) + RW'(din.q[k]) * RW'(c));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base <= '0;
      dout <= '0;
    end else begin
      base <= add40(base, 6'(ADV));
      dout <= prod;
    end
  end

endmodule
