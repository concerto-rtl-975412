// tb_pipelined_adder -- random vectors into a 40-input 6-bit tree and a 5-input 4-bit tree;
// each output must be the exact sum of the vector presented LEVELS clocks earlier
// (6 and 3 clocks), including all-minimum and all-maximum vectors.
module tb_pipelined_adder;
  logic clk = 1'b0, rst_n = 1'b0;
  logic signed [5:0]  a [40];
  logic signed [3:0]  b [5];
  logic signed [11:0] sa;
  logic signed [6:0]  sb;
  int checks = 0, failures = 0;

  pipelined_adder #(.N(40), .W(6)) dut_a (.clk, .rst_n, .din(a), .sum(sa));
  pipelined_adder #(.N(5),  .W(4)) dut_b (.clk, .rst_n, .din(b), .sum(sb));

  always #2 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int qa [$], qb [$];

  initial begin
    int s;
    foreach (a[k]) a[k] = '0;
    foreach (b[k]) b[k] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      s = 0;
      foreach (a[k]) begin
        a[k] = (n == 0) ? -6'sd32 : (n == 1) ? 6'sd31 : 6'($urandom);
        s += int'(a[k]);
      end
      qa.push_back(s);
      s = 0;
      foreach (b[k]) begin
        b[k] = (n == 0) ? -4'sd8 : (n == 1) ? 4'sd7 : 4'($urandom);
        s += int'(b[k]);
      end
      qb.push_back(s);
      @(posedge clk); #1;
      if (qa.size() == 6) begin
        checks++;
        if (int'(sa) != qa[0]) begin
          failures++;
          if (failures < 10) $display("FAIL 40-input sum %0d exp %0d", sa, qa[0]);
        end
        void'(qa.pop_front());
      end
      if (qb.size() == 3) begin
        checks++;
        if (int'(sb) != qb[0]) begin
          failures++;
          if (failures < 10) $display("FAIL 5-input sum %0d exp %0d", sb, qb[0]);
        end
        void'(qb.pop_front());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
