// tb_down_shifter -- random complex samples; output k must be input k times (-j)^k, computed
// here as a complex product with the phasor cos(-pi*k/2) + j*sin(-pi*k/2), one clock later.
// A tone at +fs/4 (the 62.5 MHz band centre) must come out as a constant (DC).
module tb_down_shifter;
  import concerto_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  band_iq_t din = '0, dout;
  int checks = 0, failures = 0;

  down_shifter dut (.clk, .rst_n, .din, .dout);

  always #2 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int c, s, ei, eq;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int k = 0; k < 4000; k++) begin
      if (k < 2000) begin
        din.i = band_s_t'($urandom_range(0, 65534) - 32767);
        din.q = band_s_t'($urandom_range(0, 65534) - 32767);
      end else begin
        // +fs/4 tone: 1000 * j^k
        case (k % 4)
          0: begin din.i = 1000;  din.q = 0;     end
          1: begin din.i = 0;     din.q = 1000;  end
          2: begin din.i = -1000; din.q = 0;     end
          default: begin din.i = 0; din.q = -1000; end
        endcase
      end
      c = int'($floor($cos(-3.14159265358979 * k / 2.0) + 0.5));
      s = int'($floor($sin(-3.14159265358979 * k / 2.0) + 0.5));
      ei = int'(din.i) * c - int'(din.q) * s;
      eq = int'(din.i) * s + int'(din.q) * c;
      @(posedge clk); #1;
      checks++;
      if (int'(dout.i) != ei || int'(dout.q) != eq) begin
        failures++;
        if (failures < 10) $display("FAIL k=%0d out=%0d,%0d exp=%0d,%0d", k, dout.i, dout.q, ei, eq);
      end
      if (k >= 2000) begin
        checks++;
        if (dout.i != 1000 || dout.q != 0) begin
          failures++;
          if (failures < 10) $display("FAIL DC k=%0d out=%0d,%0d", k, dout.i, dout.q);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
