// concerto_pkg -- constants, sample types and tables shared by the KID readout DSP chain.
//
// The readout synthesizes a comb of NBANDS*TONES_PER_BAND excitation tones and analyses the
// returning signal tone by tone. Bands run at 250 MSPS; the wideband stream runs at 2 GSPS and
// is carried as LANES=8 parallel samples per 250 MHz clock (lane 0 is the oldest sample of the
// clock, lane 7 the newest). The numbers below are those of the optimized firmware: 10 bands of
// 40 tones, 16-bit frequency control words, a phase/averaging period of 65520 samples, a 6-bit
// 3-iteration CORDIC, 12-bit analysis channels, 48-bit averaging accumulators and 32-bit results.
// Widths the source design does not state (gain selects, wideband sample width) are this
// design's own choices and are marked as such.
package concerto_pkg;

  // Comb organisation
  localparam int unsigned NBANDS          = 10;     // ten 100 MHz subbands
  localparam int unsigned TONES_PER_BAND  = 40;     // 40 tones per subband
  localparam int unsigned LANES           = 8;      // x8 upsampling: 8 samples per clock

  // Tone generator
  localparam int unsigned FCW_W           = 16;     // "16 bit acc"
  localparam int unsigned PERIOD          = 65520;  // phase accumulator and averaging length
  localparam int unsigned CORDIC_W        = 6;      // CORDIC output width (optimized)
  localparam int unsigned CORDIC_ITER     = 3;      // CORDIC iterations (optimized)
  localparam int unsigned GAINSEL_W       = 3;      // own choice: attenuation 0..7 (right shifts)

  // Band path
  localparam int unsigned BAND_W          = 16;     // band manager output width
  localparam int unsigned BANDGAIN_W      = 4;      // own choice: band gain 0..15 (left shifts)
  localparam int unsigned WB_W            = 16;     // own choice: wideband sample width

  // Tone analyzer
  localparam int unsigned CHAN_W          = 12;     // PFB channel sample width
  localparam int unsigned ACC_W           = 48;     // averaging accumulator width
  localparam int unsigned IQ_W            = 32;     // decimated I/Q output width

  typedef logic        [FCW_W-1:0]      fcw_t;
  typedef logic        [GAINSEL_W-1:0]  gainsel_t;
  typedef logic        [BANDGAIN_W-1:0] bandgain_t;
  typedef logic signed [BAND_W-1:0]     band_s_t;
  typedef logic signed [WB_W-1:0]       wb_s_t;
  typedef wb_s_t       [LANES-1:0]      wb_lanes_t;   // 8 wideband samples of one clock
  typedef logic signed [CHAN_W-1:0]     chan_s_t;
  typedef logic signed [IQ_W-1:0]       iq_s_t;

  // Complex band sample (I, Q) at 250 MSPS
  typedef struct packed {
    band_s_t i;
    band_s_t q;
  } band_iq_t;

  // One clock of the 2 GSPS complex stream
  typedef struct packed {
    wb_lanes_t i;
    wb_lanes_t q;
  } wb_iq_t;

  // Band-shifter table: 40 samples of one sine period, round(32767*sin(2*pi*k/40)).
  // cos(2*pi*k/40) is read as entry (k+10) mod 40.
  localparam int unsigned LUT_LEN = 40;
  localparam int unsigned LUT_W   = 16;
  localparam logic signed [LUT_W-1:0] SIN_LUT [LUT_LEN] = '{
        0,   5126,  10126,  14876,  19260,  23170,  26509,  29196,  31163,  32364,
    32767,  32364,  31163,  29196,  26509,  23170,  19260,  14876,  10126,   5126,
        0,  -5126, -10126, -14876, -19260, -23170, -26509, -29196, -31163, -32364,
   -32767, -32364, -31163, -29196, -26509, -23170, -19260, -14876, -10126,  -5126
  };

  // CORDIC arctangent table: round(atan(2^-i) * 2^16 / (2*pi)), angle unit = 1/65536 turn.
  localparam int unsigned ATAN_LEN = 16;
  localparam logic [15:0] ATAN_LUT [ATAN_LEN] = '{
    16'd8192, 16'd4836, 16'd2555, 16'd1297, 16'd651, 16'd326, 16'd163, 16'd81,
    16'd41,   16'd20,   16'd10,   16'd5,    16'd3,   16'd1,   16'd1,   16'd0
  };

  // Band-shifter LUT index step per 2 GSPS sample for band b: the shift is
  // (50 + 100*b) MHz / 2000 MHz = (1 + 2*b)/40 of a turn per sample.
  function automatic int unsigned band_step(input int unsigned b);
    return (1 + 2*b) % LUT_LEN;
  endfunction

endpackage
