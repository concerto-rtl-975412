// tb_phase_accumulator -- self-checking test of the modulo-65520 phase accumulator.
//
// Drives random and boundary frequency control words and compares phase and wrap every clock
// with an integer model, phase(n+1) = (phase(n) + fcw) mod 65520. Also checks the periodicity
// the modulus is chosen for: with any fcw, the phase returns to its start after 65520 clocks.
module tb_phase_accumulator;
  import concerto_pkg::*;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        en = 1'b0;
  logic [15:0] fcw = '0;
  logic [15:0] phase;
  logic        wrap;
  int          checks = 0, failures = 0, wraps = 0;

  phase_accumulator dut (.clk, .rst_n, .en, .fcw, .phase, .wrap);

  always #2 clk = ~clk;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step_check(input logic [15:0] f);
    int unsigned exp_phase;
    logic        exp_wrap;
    fcw = f;
    en  = 1'b1;
    exp_phase = (int'(phase) + int'(f));
    exp_wrap  = exp_phase >= 65520;
    if (exp_wrap) exp_phase -= 65520;
    @(posedge clk); #1;
    checks++;
    if (phase !== 16'(exp_phase) || wrap !== exp_wrap) begin
      failures++;
      if (failures < 10) $display("FAIL fcw=%0d phase=%0d exp=%0d wrap=%b exp=%b",
                                  f, phase, exp_phase, wrap, exp_wrap);
    end
    if (wrap) wraps++;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    checks++;
    if (phase !== 0) failures++;
    // boundary words
    step_check(16'd65519); step_check(16'd1); step_check(16'd65519); step_check(16'd65519);
    step_check(16'd0);     step_check(16'd32760); step_check(16'd32760);
    // random words
    for (int n = 0; n < 5000; n++) step_check(16'($urandom_range(0, 65519)));
    // periodicity: constant fcw, phase repeats after exactly 65520 samples
    begin
      logic [15:0] start;
      logic [15:0] f;
      f = 16'd12345;
      step_check(f);
      start = phase;
      for (int n = 0; n < 65519; n++) step_check(f);
      checks++;
      if (phase === start) begin
        failures++;   // must not repeat early for an fcw coprime with the modulus
        $display("FAIL early repeat");
      end
      step_check(f);
      checks++;
      if (phase !== start) begin
        failures++;
        $display("FAIL period: phase %0d start %0d", phase, start);
      end
    end
    checks++;
    if (wraps == 0) failures++;
    $display("wraps seen: %0d", wraps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
