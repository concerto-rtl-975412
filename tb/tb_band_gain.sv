// tb_band_gain -- random 12-bit I/Q sums and gains 0..15: outputs must be in * 2^gain clipped to
// +-32767, with `sat` set exactly when a clip happened, one clock later. Clipping both ways
// must occur.
module tb_band_gain;
  import concerto_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  bandgain_t gain = '0;
  logic signed [11:0] i_in = '0, q_in = '0;
  band_s_t i_out, q_out;
  logic sat;
  int checks = 0, failures = 0, n_sat = 0;

  band_gain dut (.clk, .rst_n, .gain, .i_in, .q_in, .i_out, .q_out, .sat);

  always #2 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint clip(input longint v, output bit c);
    c = 0;
    if (v > 32767)  begin c = 1; return 32767;  end
    if (v < -32767) begin c = 1; return -32767; end
    return v;
  endfunction

  initial begin
    longint ei, eq;
    bit ci, cq;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int n = 0; n < 4000; n++) begin
      i_in = 12'($urandom);
      q_in = 12'($urandom);
      gain = 4'($urandom);
      ei = clip(longint'(i_in) * (longint'(1) << gain), ci);
      eq = clip(longint'(q_in) * (longint'(1) << gain), cq);
      @(posedge clk); #1;
      checks++;
      if (longint'(i_out) != ei || longint'(q_out) != eq || sat != (ci | cq)) begin
        failures++;
        if (failures < 10) $display("FAIL in=%0d,%0d g=%0d out=%0d,%0d exp=%0d,%0d sat=%b",
                                    i_in, q_in, gain, i_out, q_out, ei, eq, sat);
      end
      if (sat) n_sat++;
    end
    checks++;
    if (n_sat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
