// tb_digital_attenuator -- checks out = in / 2^gain_sel rounded toward zero, one clock of
// latency, for every gain setting and random inputs in the CORDIC range -31..31, extremes
// included.
module tb_digital_attenuator;
  import concerto_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [2:0] gain_sel = '0;
  logic signed [5:0] din = '0, dout;
  int checks = 0, failures = 0;

  digital_attenuator dut (.clk, .rst_n, .gain_sel, .din, .dout);

  always #2 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int trunc_div(input int a, input int d);
    return (a >= 0) ? a / d : -((-a) / d);
  endfunction

  initial begin
    int exp_v;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int n = 0; n < 2000; n++) begin
      din      = (n < 16) ? ((n % 2) ? -6'sd31 : 6'sd31) : 6'($urandom_range(0, 62) - 31);
      gain_sel = (n < 16) ? 3'(n / 2) : 3'($urandom);
      exp_v    = trunc_div(int'(din), 2 ** int'(gain_sel));
      @(posedge clk); #1;
      checks++;
      if (int'(dout) != exp_v) begin
        failures++;
        if (failures < 10) $display("FAIL in=%0d g=%0d out=%0d exp=%0d", din, gain_sel, dout, exp_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
