// tb_kid_readout_dsp -- end-to-end test of the whole readout at its default size:
// 10 bands x 40 tones, 65520-sample phase and averaging period, 6-bit 3-iteration CORDIC.
//
// Configuration: tone t of band b gets fcw = (1600 + 1582*t + 1736*b) mod 65520, a set chosen
// so that no tone of one band, leaking through the simple channelizer into another band's
// channel, lands on a checked tone or on its 3rd..9th square-wave harmonics. In each band one
// tone (t = b) plays at full amplitude (gain_sel 0); the other 39 are muted (gain_sel 7) but
// their analyzers still run. Band gains are 8.
//
// Sequence and checks:
//  1. digital loopback (Setup 1): dac_out feeds the analyzer. Results come every 65520 clocks
//     exactly (checked). In the second window (the first starts during pipeline fill) the
//     magnitude sqrt(I^2+Q^2) of every active tone must be (2/pi) * A * 65520 within 12 %,
//     where A = 31 * D(fc)^3 is the amplitude worked out from the chain's gains (31 CORDIC,
//     x256 band gain, /16 band adder, x8/128 filter bank) and D(f) = sin(8*pi*f/2000) /
//     (8*sin(pi*f/2000)) is the response at the tone's offset fc from its band centre of the
//     linear interpolator (D^2) and of the 8-sample boxcar (D). Every muted tone must read
//     below 8 % of its band's active tone.
//     The next window must then return bit-identical sums for all 400 tones, as the
//     comb and the averaging window share the 65520-clock period (no spurs in loopback).
//  2. switch to the ADC input, held at 0: after one transition window every I/Q must be 0.
//  3. raise band 0's gain to 15 for a while: the band must report clipping.
// Mechanisms counted, each must occur: phase wrap, result window, loopback mode, ADC mode,
// band clipping, square-wave sign inversion (reference MSB set at a tone analyzer).
module tb_kid_readout_dsp;
  import concerto_pkg::*;

  localparam int NB = NBANDS;
  localparam int NT = TONES_PER_BAND;
  localparam real PI = 3.14159265358979;

  logic      clk = 1'b0, rst_n = 1'b0;
  fcw_t      fcw       [NB][NT];
  gainsel_t  gain_sel  [NB][NT];
  bandgain_t band_gain [NB];
  logic      loopback_en = 1'b1;
  wb_iq_t    dac_out, adc_in = '0;
  iq_s_t     iq_i [NB][NT], iq_q [NB][NT];
  logic      iq_valid, phase_wrap;
  logic [NB-1:0] band_sat;

  int checks = 0, failures = 0;
  int n_wrap = 0, n_window = 0, n_loopback = 0, n_adc = 0, n_sat = 0, n_invert = 0;

  kid_readout_dsp dut (.clk, .rst_n, .fcw, .gain_sel, .band_gain, .loopback_en, .dac_out,
                       .adc_in, .iq_i, .iq_q, .iq_valid, .band_sat, .phase_wrap);

  always #2 clk = ~clk;

  initial begin : watchdog
    repeat (7 * 65520) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  always @(posedge clk) if (rst_n) begin
    if (phase_wrap)  n_wrap++;
    if (band_sat != '0) n_sat++;
    if (loopback_en) n_loopback++; else n_adc++;
    if (dut.g_band[0].u_bm.g_tone[0].u_tone.u_gen.ref_cos[CORDIC_W-1]) n_invert++;
  end

  function automatic real dresp(input real f_mhz);
    real x;
    x = PI * f_mhz / 2000.0;
    if (x < 1.0e-9 && x > -1.0e-9) return 1.0;
    return $sin(8.0 * x) / (8.0 * $sin(x));
  endfunction

  function automatic real mag(input iq_s_t a, input iq_s_t b);
    return $sqrt(real'(a) * real'(a) + real'(b) * real'(b));
  endfunction

  task automatic wait_window(output int cycles);
    cycles = 0;
    do begin
      @(posedge clk); #1;
      cycles++;
    end while (!iq_valid);
    n_window++;
  endtask

  initial begin
    int  cyc;
    real expect_m, got, fc;
    for (int b = 0; b < NB; b++) begin
      band_gain[b] = 4'd8;
      for (int t = 0; t < NT; t++) begin
        fcw[b][t]      = fcw_t'((1600 + 1582 * t + 1736 * b) % 65520);
        gain_sel[b][t] = (t == b) ? 3'd0 : 3'd7;
      end
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // 1. digital loopback
    wait_window(cyc);
    wait_window(cyc);
    checks++;
    if (cyc != 65520) begin failures++; $display("FAIL result interval %0d", cyc); end
    for (int b = 0; b < NB; b++) begin
      real active;
      fc = real'(fcw[b][b]) / 65536.0 * 250.0 - 62.5;
      expect_m = (2.0 / PI) * 31.0 * dresp(fc) ** 3 * 65520.0;
      active = mag(iq_i[b][b], iq_q[b][b]);
      checks++;
      if (active < 0.88 * expect_m || active > 1.12 * expect_m) begin
        failures++;
        $display("FAIL band %0d active tone |IQ| %0.0f expected %0.0f", b, active, expect_m);
      end
      $display("band %0d tone %0d fc %6.2f MHz |IQ| %9.0f expected %9.0f (I %0d Q %0d)", b, b,
               fc, active, expect_m, iq_i[b][b], iq_q[b][b]);
      for (int t = 0; t < NT; t++) if (t != b) begin
        got = mag(iq_i[b][t], iq_q[b][t]);
        checks++;
        if (got > 0.08 * active) begin
          failures++;
          if (failures < 20) $display("FAIL band %0d muted tone %0d |IQ| %0.0f vs active %0.0f",
                                      b, t, got, active);
        end
      end
    end

    // 1b. in loopback the whole comb repeats every 65520 clocks, so once the pipelines are
    //     full every window must return exactly the same sums: no window-to-window ripple,
    //     i.e. no spur at any offset frequency in the result streams.
    begin
      iq_s_t prev_i [NB][NT], prev_q [NB][NT];
      int n_diff = 0;
      prev_i = iq_i;
      prev_q = iq_q;
      wait_window(cyc);
      checks++;
      if (cyc != 65520) begin failures++; $display("FAIL result interval %0d", cyc); end
      for (int b = 0; b < NB; b++)
        for (int t = 0; t < NT; t++) begin
          checks++;
          if (iq_i[b][t] != prev_i[b][t] || iq_q[b][t] != prev_q[b][t]) begin
            failures++;
            n_diff++;
            if (n_diff < 10) $display("FAIL band %0d tone %0d changed between windows", b, t);
          end
        end
      $display("repeat check: %0d of %0d tones differ between consecutive windows", n_diff,
               NB * NT);
    end

    // 2. ADC input, held at zero
    loopback_en = 1'b0;
    wait_window(cyc);
    // 3. clipping in band 0 while the analyzer sees only the (zero) ADC input
    band_gain[0] = 4'd15;
    repeat (2000) @(posedge clk);
    band_gain[0] = 4'd8;
    wait_window(cyc);
    checks++;
    if (cyc + 2000 != 65520) begin failures++; $display("FAIL result interval %0d", cyc + 2000); end
    for (int b = 0; b < NB; b++)
      for (int t = 0; t < NT; t++) begin
        checks++;
        if (iq_i[b][t] != 0 || iq_q[b][t] != 0) begin
          failures++;
          if (failures < 20) $display("FAIL ADC mode band %0d tone %0d I %0d Q %0d", b, t,
                                      iq_i[b][t], iq_q[b][t]);
        end
      end

    $display("mechanisms: phase wraps %0d, windows %0d, loopback clocks %0d, ADC clocks %0d, ",
             n_wrap, n_window, n_loopback, n_adc);
    $display("            band clipping clocks %0d, sign inversions (band 0 tone 0) %0d",
             n_sat, n_invert);
    checks += 6;
    if (n_wrap == 0)     begin failures++; $display("FAIL no phase wrap"); end
    if (n_window < 5)    begin failures++; $display("FAIL too few windows"); end
    if (n_loopback == 0) begin failures++; $display("FAIL loopback mode never used"); end
    if (n_adc == 0)      begin failures++; $display("FAIL ADC mode never used"); end
    if (n_sat == 0)      begin failures++; $display("FAIL band clipping never happened"); end
    if (n_invert == 0)   begin failures++; $display("FAIL no sign inversion"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
