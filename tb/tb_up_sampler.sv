// tb_up_sampler -- random complex samples; each clock's 8 lanes must be the linear
// interpolation between the previous and the current input,
// lane k = floor(((7-k)*x(m-1) + (k+1)*x(m)) / 8), one clock later; lane 7 equals x(m).
module tb_up_sampler;
  import concerto_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  band_iq_t din = '0, prev = '0;
  wb_iq_t dout;
  int checks = 0, failures = 0;

  up_sampler dut (.clk, .rst_n, .din, .dout);

  always #2 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int fdiv8(input int a);
    return (a >= 0) ? a / 8 : -((-a + 7) / 8);
  endfunction

  initial begin
    int ei, eq;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int m = 0; m < 3000; m++) begin
      prev = din;
      din.i = band_s_t'($urandom);
      din.q = band_s_t'($urandom);
      if (m == 5) begin din.i = 16'sh8000; din.q = 16'sh7fff; end
      @(posedge clk); #1;
      for (int k = 0; k < 8; k++) begin
        ei = fdiv8((7 - k) * int'(prev.i) + (k + 1) * int'(din.i));
        eq = fdiv8((7 - k) * int'(prev.q) + (k + 1) * int'(din.q));
        checks++;
        if (int'(dout.i[k]) != ei || int'(dout.q[k]) != eq) begin
          failures++;
          if (failures < 10) $display("FAIL m=%0d lane %0d out=%0d,%0d exp=%0d,%0d", m, k,
                                      dout.i[k], dout.q[k], ei, eq);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
