// tb_polyphase_filter_bank -- ten channels from the 8-lane complex input.
//
// Part 1 (bit-exact): random input; for every band b the expected channel is computed here
// from the definition: each lane j = 8t+k multiplied by round(32767*exp(-j*2*pi*(1+2b)*j/40)),
// rounded by 2^-15, the 8 lanes of a clock summed, multiplied by (+j)^(t+1), real part taken,
// divided by 2^7 and clamped to +-2047; it appears 3 clocks after the input.
// Part 2 (function): a complex tone at the centre of band 3 (650 MHz) must appear in channel 3
// at 62.5 MHz with amplitude 8*A/128 (within 2 %), and every other channel must be weaker,
// the two neighbours by at least 20 %.
module tb_polyphase_filter_bank;
  import concerto_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  wb_iq_t din = '0;
  chan_s_t ch [10];
  int checks = 0, failures = 0;

  polyphase_filter_bank dut (.clk, .rst_n, .din, .chan_out(ch));

  always #2 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam real PI = 3.14159265358979;

  function automatic int expect_chan(input int b, input longint t, input wb_iq_t x);
    longint zi, zq, v;
    zi = 0; zq = 0;
    for (int k = 0; k < 8; k++) begin
      real th;
      longint c, s;
      th = -2.0 * PI * real'(((1 + 2 * b) * (8 * t + k)) % 40) / 40.0;
      c  = longint'($floor(32767.0 * $cos(th) + 0.5));
      s  = longint'($floor(32767.0 * $sin(th) + 0.5));
      zi += (longint'(x.i[k]) * c - longint'(x.q[k]) * s + 16384) >>> 15;
      zq += (longint'(x.i[k]) * s + longint'(x.q[k]) * c + 16384) >>> 15;
    end
    case ((t + 1) % 4)
      0: v = zi;
      1: v = -zq;
      2: v = -zi;
      default: v = zq;
    endcase
    v = v >>> 7;
    return int'((v > 2047) ? 2047 : (v < -2047) ? -2047 : v);
  endfunction

  wb_iq_t hist [$];
  int     peak [10];

  initial begin
    int e;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    foreach (peak[b]) peak[b] = 0;
    for (int t = 0; t < 3000; t++) begin
      for (int k = 0; k < 8; k++) begin
        if (t < 1500) begin
          din.i[k] = wb_s_t'($urandom);
          din.q[k] = wb_s_t'($urandom);
          if (t < 4) begin din.i[k] = (t % 2) ? 16'sh8001 : 16'sh7fff; din.q[k] = din.i[k]; end
        end else begin
          real th;
          th = 2.0 * PI * real'((7 * (8 * t + k)) % 40) / 40.0;   // band 3: step 1 + 2*3 = 7
          din.i[k] = wb_s_t'($rtoi($floor(8000.0 * $cos(th) + 0.5)));
          din.q[k] = wb_s_t'($rtoi($floor(8000.0 * $sin(th) + 0.5)));
        end
      end
      hist.push_back(din);
      @(posedge clk); #1;
      if (t >= 2 && t < 1500) begin
        for (int b = 0; b < 10; b++) begin
          e = expect_chan(b, longint'(t - 2), hist[t - 2]);
          checks++;
          if (int'(ch[b]) != e) begin
            failures++;
            if (failures < 10) $display("FAIL t=%0d band %0d got %0d exp %0d", t, b, ch[b], e);
          end
        end
      end
      if (t >= 1510)
        for (int b = 0; b < 10; b++)
          if ((ch[b] < 0 ? -int'(ch[b]) : int'(ch[b])) > peak[b])
            peak[b] = (ch[b] < 0) ? -int'(ch[b]) : int'(ch[b]);
    end
    checks++;
    if (peak[3] < 490 || peak[3] > 510) begin
      failures++; $display("FAIL band 3 peak %0d, expected 500", peak[3]);
    end
    for (int b = 0; b < 10; b++) if (b != 3) begin
      checks++;
      if (peak[b] * 10 > peak[3] * ((b == 2 || b == 4) ? 8 : 10)) begin
        failures++; $display("FAIL band %0d leaks %0d vs %0d", b, peak[b], peak[3]);
      end
    end
    $display("channel peaks: %p", peak);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
