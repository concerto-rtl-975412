// tb_tone_analyzer -- checks square-wave demodulation and the averaging window.
//
// Part 1: random 12-bit samples and random reference sign bits, windows of random length
// framed by win_last. Each window's I and Q sums are computed here (sample negated when the
// reference MSB is 1) and compared with the outputs; valid must come exactly 2 clocks after
// win_last and nowhere else. Part 2: one full 65520-sample window of the most negative sample,
// always inverted, checks the largest possible sum (2048 * 65520) reaches the 32-bit output.
module tb_tone_analyzer;
  import concerto_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  chan_s_t chan_in = '0;
  logic cmsb = 1'b0, smsb = 1'b0, win_last = 1'b0;
  iq_s_t i_out, q_out;
  logic valid;
  int checks = 0, failures = 0;

  tone_analyzer dut (.clk, .rst_n, .chan_in, .ref_cos_msb(cmsb), .ref_sin_msb(smsb), .win_last,
                     .i_out, .q_out, .valid);

  always #2 clk = ~clk;

  initial begin : watchdog
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected results queue, each entry = {cycle of valid, I, Q}
  longint exp_i [$], exp_q [$];
  int     exp_t [$];
  int     cyc = 0;
  longint si = 0, sq = 0;

  // checker: runs after every clock edge
  always @(posedge clk) begin
    #1;
    if (rst_n) begin
      cyc++;
      if (exp_t.size() > 0 && exp_t[0] == cyc) begin
        checks++;
        if (!valid || longint'(i_out) != exp_i[0] || longint'(q_out) != exp_q[0]) begin
          failures++;
          if (failures < 10) $display("FAIL cyc=%0d valid=%b I=%0d/%0d Q=%0d/%0d", cyc, valid,
                                      i_out, exp_i[0], q_out, exp_q[0]);
        end
        void'(exp_t.pop_front()); void'(exp_i.pop_front()); void'(exp_q.pop_front());
      end else if (valid) begin
        checks++;
        failures++;
        if (failures < 10) $display("FAIL unexpected valid at %0d", cyc);
      end
    end
  end

  task automatic drive(input chan_s_t x, input logic c, input logic s, input logic last);
    chan_in = x; cmsb = c; smsb = s; win_last = last;
    si += c ? -longint'(x) : longint'(x);
    sq += s ? -longint'(x) : longint'(x);
    if (last) begin
      // presented before edge cyc+1, valid visible after edge cyc+2
      exp_t.push_back(cyc + 2); exp_i.push_back(si); exp_q.push_back(sq);
      si = 0; sq = 0;
    end
    @(posedge clk); #2;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    #2;
    for (int w = 0; w < 60; w++) begin
      int len;
      len = (w == 0) ? 1 : int'($urandom_range(2, 400));
      for (int k = 0; k < len; k++)
        drive(chan_s_t'($urandom), 1'($urandom), 1'($urandom), k == len - 1);
    end
    for (int k = 0; k < 65520; k++) drive(-12'sd2048, 1'b1, 1'b0, k == 65519);
    repeat (5) drive('0, 1'b0, 1'b0, 1'b0);
    checks++;
    if (exp_t.size() != 0) begin failures++; $display("FAIL missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
