// tb_period_comparison -- the readout with a power-of-two period (MODULUS = 65536) instead of
// 65520, in digital loopback, to show the effect the 65520 period removes.
//
// With a 65536-clock phase and averaging period, the band shifters (pattern period 5 clocks)
// make the comb repeat only every 5 * 65536 clocks. A 65536-sample window then no longer
// covers a whole period of its input, so consecutive results differ: the result streams carry
// a ripple with a period of 5 windows, i.e. lines at 1/5 of the output rate and its harmonic.
// The default 65520 design returns identical sums every window (checked in
// tb_kid_readout_dsp). Here, with 10 bands of 8 tones (tone t = b % 8 of each band playing):
//   * results arrive every 65536 clocks;
//   * windows k and k+5 are bit-identical for every tone (period of 5 windows);
//   * at least one tone's result differs between consecutive windows (the ripple exists).
// The testbench reduces the tones per band to 8 to keep the run short; the mechanism does not
// depend on the number of tones.
module tb_period_comparison;
  import concerto_pkg::*;

  localparam int NB  = NBANDS;
  localparam int NT  = 8;
  localparam int MOD = 65536;
  localparam int NW  = 6;        // windows compared after the first (pipeline fill) window

  logic      clk = 1'b0, rst_n = 1'b0;
  fcw_t      fcw       [NB][NT];
  gainsel_t  gain_sel  [NB][NT];
  bandgain_t band_gain [NB];
  wb_iq_t    dac_out;
  iq_s_t     iq_i [NB][NT], iq_q [NB][NT];
  logic      iq_valid, phase_wrap;
  logic [NB-1:0] band_sat;

  iq_s_t hist_i [NW][NB][NT], hist_q [NW][NB][NT];
  int checks = 0, failures = 0;

  kid_readout_dsp #(.NT(NT), .MODULUS(MOD)) dut (
    .clk, .rst_n, .fcw, .gain_sel, .band_gain, .loopback_en(1'b1), .dac_out, .adc_in('0),
    .iq_i, .iq_q, .iq_valid, .band_sat, .phase_wrap);

  always #2 clk = ~clk;

  initial begin : watchdog
    repeat ((NW + 2) * MOD) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wait_window(output int cycles);
    cycles = 0;
    do begin
      @(posedge clk); #1;
      cycles++;
    end while (!iq_valid);
  endtask

  initial begin
    int cyc, n_ripple;
    for (int b = 0; b < NB; b++) begin
      band_gain[b] = 4'd8;
      for (int t = 0; t < NT; t++) begin
        fcw[b][t]      = fcw_t'((1600 + 1582 * t + 1736 * b) % 65520);
        gain_sel[b][t] = (t == b % NT) ? 3'd0 : 3'd7;
      end
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    wait_window(cyc);                           // first window: pipelines still filling
    for (int w = 0; w < NW; w++) begin
      wait_window(cyc);
      checks++;
      if (cyc != MOD) begin failures++; $display("FAIL result interval %0d", cyc); end
      hist_i[w] = iq_i;
      hist_q[w] = iq_q;
    end

    // period of 5 windows, bit-exact
    for (int b = 0; b < NB; b++)
      for (int t = 0; t < NT; t++) begin
        checks++;
        if (hist_i[5][b][t] != hist_i[0][b][t] || hist_q[5][b][t] != hist_q[0][b][t]) begin
          failures++;
          $display("FAIL band %0d tone %0d: windows 0 and 5 differ", b, t);
        end
      end

    // ripple between consecutive windows
    n_ripple = 0;
    for (int b = 0; b < NB; b++)
      for (int t = 0; t < NT; t++)
        for (int w = 1; w < 5; w++)
          if (hist_i[w][b][t] != hist_i[0][b][t] || hist_q[w][b][t] != hist_q[0][b][t]) begin
            n_ripple++;
            break;
          end
    for (int b = 0; b < NB; b++)
      $display("band %0d tone %0d I over 5 windows: %0d %0d %0d %0d %0d", b, b % NT,
               hist_i[0][b][b % NT], hist_i[1][b][b % NT], hist_i[2][b][b % NT],
               hist_i[3][b][b % NT], hist_i[4][b][b % NT]);
    $display("tones whose result changes from window to window: %0d of %0d", n_ripple, NB * NT);
    checks++;
    if (n_ripple == 0) begin failures++; $display("FAIL no window-to-window ripple"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
