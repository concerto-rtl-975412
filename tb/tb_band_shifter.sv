// tb_band_shifter -- bands 0 and 9. Random complex lanes are multiplied here by the phasor
// exp(+j*2*pi*(1+2b)*j/40) for global sample index j = 8*clock + lane, the phasor quantized
// as round(32767*cos), round(32767*sin), the product rounded by 2^-15 and clamped to 16 bits;
// the block's lanes must match one clock later. A constant input must give an output whose
// 8-lane pattern repeats every 5 clocks (the 40-sample period) and not earlier.
module tb_band_shifter;
  import concerto_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  wb_iq_t din = '0, d0, d9;
  int checks = 0, failures = 0;

  band_shifter #(.BAND(0)) dut0 (.clk, .rst_n, .din, .dout(d0));
  band_shifter #(.BAND(9)) dut9 (.clk, .rst_n, .din, .dout(d9));

  always #2 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void expect_lane(input int b, input longint j, input int xi, input int xq,
                                      output int ei, output int eq);
    real    th;
    longint c, s, re, im;
    th = 2.0 * 3.14159265358979 * real'(((1 + 2 * b) * j) % 40) / 40.0;
    c  = longint'($floor(32767.0 * $cos(th) + 0.5));
    s  = longint'($floor(32767.0 * $sin(th) + 0.5));
    re = (xi * c - xq * s + 16384) >>> 15;
    im = (xi * s + xq * c + 16384) >>> 15;
    ei = int'((re > 32767) ? 32767 : (re < -32767) ? -32767 : re);
    eq = int'((im > 32767) ? 32767 : (im < -32767) ? -32767 : im);
  endfunction

  wb_iq_t hist0 [$];

  initial begin
    int ei, eq;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 2000; t++) begin
      for (int k = 0; k < 8; k++) begin
        din.i[k] = (t < 1000) ? wb_s_t'($urandom) : wb_s_t'(12000);
        din.q[k] = (t < 1000) ? wb_s_t'($urandom) : wb_s_t'(-5000);
      end
      @(posedge clk); #1;
      for (int k = 0; k < 8; k++) begin
        expect_lane(0, longint'(t) * 8 + k, int'(din.i[k]), int'(din.q[k]), ei, eq);
        checks++;
        if (int'(d0.i[k]) != ei || int'(d0.q[k]) != eq) begin
          failures++;
          if (failures < 10) $display("FAIL b0 t=%0d k=%0d out=%0d,%0d exp=%0d,%0d", t, k,
                                      d0.i[k], d0.q[k], ei, eq);
        end
        expect_lane(9, longint'(t) * 8 + k, int'(din.i[k]), int'(din.q[k]), ei, eq);
        checks++;
        if (int'(d9.i[k]) != ei || int'(d9.q[k]) != eq) begin
          failures++;
          if (failures < 10) $display("FAIL b9 t=%0d k=%0d out=%0d,%0d exp=%0d,%0d", t, k,
                                      d9.i[k], d9.q[k], ei, eq);
        end
      end
      if (t >= 1000) begin
        hist0.push_back(d9);
        if (hist0.size() > 5) begin
          checks++;
          if (hist0[hist0.size() - 1] != hist0[hist0.size() - 6]) begin
            failures++; $display("FAIL period 5 t=%0d", t);
          end
          for (int p = 1; p < 5; p++) begin
            checks++;
            if (hist0[hist0.size() - 1] == hist0[hist0.size() - 1 - p]) begin
              failures++; $display("FAIL early period %0d", p);
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
