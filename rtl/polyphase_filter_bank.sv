// polyphase_filter_bank -- channelizes the 0..1 GHz analysis stream into NB band channels.
//
// Input: the complex 2 GSPS stream, 8 lanes per 250 MHz clock (from the ADC interface, or from
// the comb generator in digital loopback). Output: per band one real 12-bit channel at 250 MSPS
// whose content is the band's 100 MHz slice placed at 12.5..112.5 MHz, the frame in which its
// band manager generated the tones, so the tone analyzers can demodulate it with the tones' own
// references. The source states this function (ten 100 MHz subbands sampled at 250 MHz, with
// complex demodulation, filtering and downsampling) but not the prototype filter or structure.
// This design builds the simplest channelizer with that function, per band b:
//   1. complex demodulation by exp(-j*2*pi*(1+2b)/40 * j) with the shared 40-sample table
//      (the inverse of the band shifter), products rounded by 2^-15 into 17 bits,
//   2. an 8-sample boxcar sum, which is the low-pass filter and the decimation by 8 in one
//      step (its zeros fall on every multiple of 250 MHz from the band centre),
//   3. an up-shift by a quarter of 250 MHz, (+j)^m, and the real part of the result,
//   4. scaling by 2^-SHIFT and clamping to 12 bits. SHIFT = 7 (own choice) = /8 for the boxcar
//      and /16 for 16 -> 12 bits.
// The boxcar rejects neighbouring bands far less than a real polyphase prototype filter would.
// Timing: three registers (products, decimated sum, output), latency 3 clocks.
module polyphase_filter_bank
  import concerto_pkg::*;
#(
  parameter int unsigned NB    = NBANDS,
  parameter int unsigned SHIFT = 7
) (
  input  logic    clk,
  input  logic    rst_n,
  input  wb_iq_t  din,
  output chan_s_t chan_out [NB]
);

  localparam int unsigned RW   = WB_W + LUT_W + 1;      // product width
  localparam int unsigned DW   = WB_W + 4;              // decimated sum width
  localparam int          CMAX = 2 ** (CHAN_W - 1) - 1;

  logic [1:0] m;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) m <= '0;
    else        m <= m + 2'd1;
  end

  // (a + b) mod 40 for a, b < 40
  function automatic logic [5:0] add40(input logic [5:0] a, input logic [5:0] b);
    logic [6:0] t;
    t = 7'(a) + 7'(b);
    return (t >= 7'(LUT_LEN)) ? 6'(t - 7'(LUT_LEN)) : 6'(t);
  endfunction

  for (genvar b = 0; b < int'(NB); b++) begin : g_band
    localparam int unsigned STEP = band_step(b);
    localparam int unsigned ADV  = (LANES * STEP) % LUT_LEN;

    logic [5:0]           base;
    logic signed [WB_W:0] mi_d [LANES];   // demodulated lanes (next value), one bit of growth
    logic signed [WB_W:0] mq_d [LANES];
    logic signed [WB_W:0] mi   [LANES];   // demodulated lanes (registered)
    logic signed [WB_W:0] mq   [LANES];
    logic signed [DW-1:0] si, sq;         // boxcar sums (next value)
    logic signed [DW-1:0] zi, zq;         // decimated complex sample
    logic signed [DW-1:0] re_sel, sc;
    logic [1:0]           m_d;
    chan_s_t              ch_d;

    // 1. demodulation by the conjugate of the band-shift phasor
    always_comb begin
      for (int k = 0; k < int'(LANES); k++) begin
        logic [5:0]           idx_s, idx_c;
        logic signed [RW-1:0] re, im;
        idx_s = add40(base, 6'((k * STEP) % LUT_LEN));
        idx_c = add40(idx_s, 6'(LUT_LEN / 4));        // cos(x) = sin(x + quarter period)
        re = RW'(din.i[k]) * RW'(SIN_LUT[idx_c]) + RW'(din.q[k]) * RW'(SIN_LUT[idx_s]);
        im = RW'(din.q[k]) * RW'(SIN_LUT[idx_c]) - RW'(din.i[k]) * RW'(SIN_LUT[idx_s]);
        mi_d[k] = (WB_W+1)'((re + RW'(2 ** (LUT_W - 2))) >>> (LUT_W - 1));
        mq_d[k] = (WB_W+1)'((im + RW'(2 ** (LUT_W - 2))) >>> (LUT_W - 1));
      end
    end

    // 2. boxcar sum of the 8 lanes = low-pass + decimation by 8
    always_comb begin
      si = '0;
      sq = '0;
      for (int k = 0; k < int'(LANES); k++) begin
        si = si + DW'(mi[k]);
        sq = sq + DW'(mq[k]);
      end
    end

    // 3./4. real part after the +fs/4 shift, scaled and clamped
    always_comb begin
      unique case (m_d)
        2'd0:    re_sel =  zi;
        2'd1:    re_sel = -zq;
        2'd2:    re_sel = -zi;
        default: re_sel =  zq;
      endcase
      sc = re_sel >>> SHIFT;
      if (sc > DW'(CMAX))       ch_d = CHAN_W'(CMAX);
      else if (sc < -DW'(CMAX)) ch_d = CHAN_W'(-CMAX);
      else                      ch_d = CHAN_W'(sc);
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        base <= '0;
        for (int k = 0; k < int'(LANES); k++) begin
          mi[k] <= '0;
          mq[k] <= '0;
        end
        zi          <= '0;
        zq          <= '0;
        m_d         <= '0;
        chan_out[b] <= '0;
      end else begin
        base <= add40(base, 6'(ADV));
        mi   <= mi_d;
        mq   <= mq_d;
        zi   <= si;
        zq   <= sq;
        m_d  <= m;
        chan_out[b] <= ch_d;
      end
    end
  end

endmodule
