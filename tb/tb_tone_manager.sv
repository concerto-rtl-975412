// tb_tone_manager -- one tone looped back onto its own analyzer over a full 65520 window.
//
// The analysis input is the tone's own attenuated cosine scaled by 32 (gain_sel 0). Over one
// window the cosine channel must then hold about (2/pi) * 31 * 32 * 65520 * cos(d) (a cosine
// times the sign of itself), and the sine channel about the same times sin(d), where d is the
// phase the tone advances in the one clock the attenuator register delays the loop
// (2*pi*fcw/65536): both are checked against those real-arithmetic values with a margin of 3 %
// of full scale for the coarse 6-bit CORDIC. The exact sums are also recomputed here from the samples driven and the sign
// bits of the tone's reference outputs, and compared bit for bit. After two windows the tone
// is retuned (fcw 1234 -> 30001) and the fourth window is checked the same way. Every clock the
// generator outputs must equal the reference outputs of the clock before (gain_sel 0), and the
// results must come exactly 65520 clocks apart.
module tb_tone_manager;
  import concerto_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  fcw_t fcw = 16'd1234;
  gainsel_t gain_sel = '0;
  logic signed [5:0] gen_i, gen_q;
  logic wrap, win_last, iq_valid;
  chan_s_t chan_in;
  iq_s_t iq_i, iq_q;
  logic [15:0] count;
  int checks = 0, failures = 0, windows = 0;

  avg_window_counter u_win (.clk, .rst_n, .count, .win_last);

  tone_manager dut (.clk, .rst_n, .fcw, .gain_sel, .gen_i, .gen_q, .phase_wrap(wrap),
                    .chan_in, .win_last, .iq_i, .iq_q, .iq_valid);

  assign chan_in = chan_s_t'(gen_i) <<< 5;

  always #2 clk = ~clk;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Exact model of the accumulation: samples and reference signs as seen at the analyzer input
  longint mi = 0, mq = 0, done_i [$], done_q [$];
  always @(posedge clk) begin
    if (rst_n) begin
      mi += dut.ref_cos[5] ? -longint'(chan_in) : longint'(chan_in);
      mq += dut.ref_sin[5] ? -longint'(chan_in) : longint'(chan_in);
      if (win_last) begin done_i.push_back(mi); done_q.push_back(mq); mi = 0; mq = 0; end
    end
  end

  // Generator output: with gain_sel 0 the attenuated outputs are the reference outputs one
  // clock later.
  logic signed [5:0] prev_cos = '0, prev_sin = '0;
  int n_gen_fail = 0;
  always @(posedge clk) begin
    if (rst_n && gain_sel == '0) begin
      checks++;
      if (gen_i != prev_cos || gen_q != prev_sin) begin
        failures++;
        n_gen_fail++;
        if (n_gen_fail < 5) $display("FAIL generator output %0d %0d, reference %0d %0d", gen_i,
                                     gen_q, prev_cos, prev_sin);
      end
    end
    prev_cos <= dut.ref_cos;
    prev_sin <= dut.ref_sin;
  end

  // Result interval: exactly 65520 clocks between results
  int since = 0, n_valid = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      since++;
      if (iq_valid) begin
        n_valid++;
        if (n_valid > 1) begin
          checks++;
          if (since != 65520) begin failures++; $display("FAIL result interval %0d", since); end
        end
        since = 0;
      end
    end
  end

  initial begin
    real ideal, lag;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    ideal = (2.0 / 3.14159265358979) * 31.0 * 32.0 * 65520.0;
    while (windows < 4) begin
      @(posedge clk); #1;
      if (iq_valid) begin
        windows++;
        checks++;
        if (done_i.size() == 0 || longint'(iq_i) != done_i[0] || longint'(iq_q) != done_q[0]) begin
          failures++;
          $display("FAIL exact window %0d: I=%0d Q=%0d", windows, iq_i, iq_q);
        end
        if (done_i.size() > 0) begin void'(done_i.pop_front()); void'(done_q.pop_front()); end
        // first window starts during the pipeline fill, check the second one against ideal
        // after window 2 the tone changes frequency; window 3 holds both, window 4 the new one
        if (windows == 2) begin
          fcw = 16'd30001;
        end
        if (windows == 2 || windows == 4) begin
          lag = 2.0 * 3.14159265358979 * real'(windows == 2 ? 1234 : 30001) / 65536.0;
          checks++;
          if (real'(iq_i) < (ideal * $cos(lag) - 0.03 * ideal) ||
              real'(iq_i) > (ideal * $cos(lag) + 0.03 * ideal)) begin
            failures++;
            $display("FAIL I=%0d ideal %f", iq_i, ideal);
          end
          checks++;
          if (real'(iq_q) < (ideal * $sin(lag) - 0.03 * ideal) ||
              real'(iq_q) > (ideal * $sin(lag) + 0.03 * ideal)) begin
            failures++;
            $display("FAIL Q=%0d expected %f", iq_q, ideal * $sin(lag));
          end
          $display("window: I=%0d Q=%0d ideal %0.0f %0.0f", iq_i, iq_q, ideal * $cos(lag),
                   ideal * $sin(lag));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
