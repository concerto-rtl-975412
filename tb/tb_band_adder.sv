// tb_band_adder -- ten bands of random 8-lane complex samples, including all-extreme vectors;
// every output lane must be floor(sum over bands / 16), one clock later.
module tb_band_adder;
  import concerto_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  wb_iq_t din [10];
  wb_iq_t dout;
  int checks = 0, failures = 0;

  band_adder dut (.clk, .rst_n, .din, .dout);

  always #2 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int fdiv16(input int a);
    return (a >= 0) ? a / 16 : -((-a + 15) / 16);
  endfunction

  initial begin
    int si [8], sq [8];
    foreach (din[b]) din[b] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 2000; t++) begin
      for (int k = 0; k < 8; k++) begin si[k] = 0; sq[k] = 0; end
      for (int b = 0; b < 10; b++)
        for (int k = 0; k < 8; k++) begin
          din[b].i[k] = (t == 0) ? 16'sh8000 : (t == 1) ? 16'sh7fff : wb_s_t'($urandom);
          din[b].q[k] = (t == 0) ? 16'sh7fff : (t == 1) ? 16'sh8000 : wb_s_t'($urandom);
          si[k] += int'(din[b].i[k]);
          sq[k] += int'(din[b].q[k]);
        end
      @(posedge clk); #1;
      for (int k = 0; k < 8; k++) begin
        checks++;
        if (int'(dout.i[k]) != fdiv16(si[k]) || int'(dout.q[k]) != fdiv16(sq[k])) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d k=%0d out=%0d,%0d exp=%0d,%0d", t, k,
                                      dout.i[k], dout.q[k], fdiv16(si[k]), fdiv16(sq[k]));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
