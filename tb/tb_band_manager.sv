// tb_band_manager -- one band of 40 tones, generation and analysis.
//
// Reference: 40 tone generators instantiated here, separately tested, run in lockstep with the
// band manager. Generation check: band_out.i/.q must equal the band-gain-clipped sum of the 40
// reference cosines/sines of 7 clocks earlier (6 adder levels + band gain), for two band gains
// one of which clips. Analysis check: random 12-bit channel samples, windows of 700 samples;
// every tone's I/Q must equal the sum of the samples sign-inverted by its own reference
// cosine/sine MSB, all 40 reported together 2 clocks after win_last.
module tb_band_manager;
  import concerto_pkg::*;

  localparam int NT = 40;
  localparam int WIN = 700;

  logic clk = 1'b0, rst_n = 1'b0;
  fcw_t      fcw [NT];
  gainsel_t  gsel [NT];
  bandgain_t bgain = 4'd4;
  band_iq_t  band_out;
  logic      band_sat, wrap, win_last = 1'b0, iq_valid;
  chan_s_t   chan_in = '0;
  iq_s_t     iq_i [NT], iq_q [NT];
  int checks = 0, failures = 0, n_sat = 0, windows = 0;

  band_manager dut (.clk, .rst_n, .fcw, .gain_sel(gsel), .band_gain(bgain), .band_out, .band_sat,
                    .phase_wrap(wrap), .chan_in, .win_last, .iq_i, .iq_q, .iq_valid);

  logic signed [5:0] rc [NT], rs [NT], gi [NT], gq [NT];
  logic              rw [NT];
  for (genvar t = 0; t < NT; t++) begin : g_ref
    tone_generator u_ref (.clk, .rst_n, .fcw(fcw[t]), .gain_sel(gsel[t]), .ref_cos(rc[t]),
                          .ref_sin(rs[t]), .i_out(gi[t]), .q_out(gq[t]), .phase_wrap(rw[t]));
  end

  always #2 clk = ~clk;

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected band output history, and per-tone analysis accumulators
  longint hi [$], hq [$];
  longint ai [NT], aq [NT], ei [NT], eq [NT];
  bit     have_exp = 0;

  function automatic longint clip(input longint v);
    return (v > 32767) ? 32767 : (v < -32767) ? -32767 : v;
  endfunction

  always @(posedge clk) begin
    if (rst_n) begin
      longint si, sq;
      si = 0; sq = 0;
      for (int t = 0; t < NT; t++) begin
        si += longint'(gi[t]);
        sq += longint'(gq[t]);
        ai[t] += rc[t][5] ? -longint'(chan_in) : longint'(chan_in);
        aq[t] += rs[t][5] ? -longint'(chan_in) : longint'(chan_in);
      end
      hi.push_back(si);
      hq.push_back(sq);
      if (win_last) begin
        ei = ai; eq = aq; have_exp = 1;
        for (int t = 0; t < NT; t++) begin ai[t] = 0; aq[t] = 0; end
      end
    end
  end

  initial begin
    int n;
    for (int t = 0; t < NT; t++) begin
      fcw[t]  = 16'(600 + 1637 * t);
      gsel[t] = 3'(t % 3);
      ai[t] = 0; aq[t] = 0;
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (n = 1; n < 4 * WIN; n++) begin
      chan_in  = chan_s_t'($urandom);
      win_last = (n % WIN == 0);
      if (n == 2 * WIN) bgain = 4'd9;        // drive the band into clipping
      @(posedge clk); #1;
      if (band_sat) n_sat++;
      // band output: the sum sampled 6 edges before this one (6 adder levels + gain = 7 registers)
      if (hi.size() > 7) begin
        longint xi, xq;
        // the gain register sampled the band gain at the last edge
        xi = clip(hi[hi.size() - 7] * (longint'(1) << bgain));
        xq = clip(hq[hq.size() - 7] * (longint'(1) << bgain));
        checks++;
        if (longint'(band_out.i) != xi || longint'(band_out.q) != xq) begin
          failures++;
          if (failures < 10) $display("FAIL band n=%0d out=%0d,%0d exp=%0d,%0d", n, band_out.i,
                                      band_out.q, xi, xq);
        end
      end
      if (iq_valid) begin
        windows++;
        for (int t = 0; t < NT; t++) begin
          checks++;
          if (!have_exp || longint'(iq_i[t]) != ei[t] || longint'(iq_q[t]) != eq[t]) begin
            failures++;
            if (failures < 10) $display("FAIL tone %0d I=%0d/%0d Q=%0d/%0d", t, iq_i[t], ei[t],
                                        iq_q[t], eq[t]);
          end
        end
      end
    end
    checks++;
    if (windows != 3 || n_sat == 0) begin
      failures++;
      $display("FAIL windows=%0d saturations=%0d", windows, n_sat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
