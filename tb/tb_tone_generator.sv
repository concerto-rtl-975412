// tb_tone_generator -- checks one tone: frequency, phase, latency, attenuation and period.
//
// With fcw = 16380 the phase advances by almost a quarter turn per sample, so a one-clock
// latency error gives a large error. After reset the k-th phase is k*fcw mod 65520; ref_cos/
// ref_sin must follow 31*cos/sin of that phase within the 3-iteration CORDIC bound (8 LSB),
// ITER+3 clocks after the fcw is added (ITER+2 after the phase register). i_out/q_out must
// equal ref_cos/ref_sin divided by 2^gain_sel (toward zero) one clock later.
// The whole output sequence must repeat with a period of exactly 65520 samples.
module tb_tone_generator;
  import concerto_pkg::*;

  // after k clocks the phase register holds k*fcw; the CORDIC adds ITER+2 clocks
  localparam int unsigned LAT = CORDIC_ITER + 2;
  localparam int unsigned FCW = 16380;

  logic clk = 1'b0, rst_n = 1'b0;
  fcw_t fcw = 16'(FCW);
  gainsel_t gain_sel = 3'd1;
  logic signed [5:0] ref_cos, ref_sin, i_out, q_out;
  logic wrap;
  int checks = 0, failures = 0, wraps = 0;

  tone_generator dut (.clk, .rst_n, .fcw, .gain_sel, .ref_cos, .ref_sin, .i_out, .q_out,
                      .phase_wrap(wrap));

  always #2 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic signed [5:0] first_c [80];
  logic signed [5:0] prev_c, prev_s;

  initial begin
    int  n, e;
    real th;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (n = 1; n < 65520 + 80 + int'(LAT); n++) begin
      prev_c = ref_cos; prev_s = ref_sin;
      @(posedge clk); #1;
      if (wrap) wraps++;
      // after n clocks, ref_* show phase index n - LAT (phase index 0 = 0 after reset)
      if (n >= int'(LAT) && n < int'(LAT) + 3000) begin
        th = 2.0 * 3.14159265358979 * real'((longint'(n - LAT) * FCW) % 65520) / 65536.0;
        e = int'(ref_cos) - int'($floor(31.0 * $cos(th) + 0.5));
        checks++;
        if (e > 8 || e < -8) begin
          failures++;
          if (failures < 10) $display("FAIL cos n=%0d got %0d ideal %f", n, ref_cos, 31.0 * $cos(th));
        end
        e = int'(ref_sin) - int'($floor(31.0 * $sin(th) + 0.5));
        checks++;
        if (e > 8 || e < -8) begin
          failures++;
          if (failures < 10) $display("FAIL sin n=%0d got %0d ideal %f", n, ref_sin, 31.0 * $sin(th));
        end
      end
      // attenuator path: one clock behind the reference
      if (n > int'(LAT)) begin
        checks++;
        if (int'(i_out) != int'(prev_c) / 2 || int'(q_out) != int'(prev_s) / 2) begin
          failures++;
          if (failures < 10) $display("FAIL att n=%0d", n);
        end
      end
      // period of 65520 samples
      if (n >= int'(LAT) && n < int'(LAT) + 80) first_c[n - LAT] = ref_cos;
      if (n >= int'(LAT) + 65520) begin
        checks++;
        if (ref_cos !== first_c[n - LAT - 65520]) begin
          failures++;
          if (failures < 10) $display("FAIL period n=%0d", n);
        end
      end
    end
    checks++;
    if (wraps == 0) failures++;
    $display("phase wraps: %0d", wraps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
