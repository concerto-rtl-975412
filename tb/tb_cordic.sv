// tb_cordic -- self-checking test of the pipelined CORDIC.
//
// Two instances: the optimized 6-bit / 3-iteration configuration and the original 10-bit /
// 10-iteration one. Random angles are fed every clock. Each output is compared (a) bit-exactly
// with a behavioural model of the rotation algorithm written here from its definition, and
// (b) with round(A*cos), round(A*sin) from real arithmetic, within the error bound of the
// iteration count. The latency (ITER + 2 clocks) is checked through valid_out and the
// alignment of the results with the angles.
module tb_cordic;
  import concerto_pkg::*;

  localparam int unsigned LAT6  = 3 + 2;
  localparam int unsigned LAT10 = 10 + 2;

  logic clk = 1'b0, rst_n = 1'b0, vin = 1'b0;
  logic [15:0] angle = '0;
  logic v6, v10;
  logic signed [5:0] c6, s6;
  logic signed [9:0] c10, s10;
  int checks = 0, failures = 0;

  cordic #(.OUT_W(6),  .ITER(3))  dut6  (.clk, .rst_n, .valid_in(vin), .angle,
                                          .valid_out(v6),  .cos_out(c6),  .sin_out(s6));
  cordic #(.OUT_W(10), .ITER(10)) dut10 (.clk, .rst_n, .valid_in(vin), .angle,
                                          .valid_out(v10), .cos_out(c10), .sin_out(s10));

  always #2 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference: the algorithm from its definition, integer arithmetic
  function automatic void model(input int ow, input int iter, input logic [15:0] a,
                                output int c, output int s);
    real k;
    int  x, y, z, xn, yn, q, g, maxv, xr, yr;
    int  atan_t [16] = '{8192, 4836, 2555, 1297, 651, 326, 163, 81, 41, 20, 10, 5, 3, 1, 1, 0};
    logic [15:0] ao;
    g = 3;
    k = 1.0;
    for (int i = 1; i <= iter; i++) k = k * $sqrt(1.0 + 2.0 ** (-2.0 * i));
    x = int'($floor((2.0 ** (ow - 1) - 1.0) * 8.0 / k + 0.5));
    y = 0;
    ao = a + 16'h2000;
    q  = int'(ao[15:14]);
    z  = int'(ao[13:0]) - 8192;
    for (int i = 0; i < iter; i++) begin
      // micro-rotation by +-atan(2^-(i+1)): the residual is already within +-45 deg
      if (z >= 0) begin xn = x - (y >>> (i + 1)); yn = y + (x >>> (i + 1)); z = z - atan_t[i + 1]; end
      else        begin xn = x + (y >>> (i + 1)); yn = y - (x >>> (i + 1)); z = z + atan_t[i + 1]; end
      x = xn; y = yn;
    end
    case (q)
      0: begin xr =  x; yr =  y; end
      1: begin xr = -y; yr =  x; end
      2: begin xr = -x; yr = -y; end
      default: begin xr = y; yr = -x; end
    endcase
    maxv = 2 ** (ow - 1) - 1;
    c = (xr + 2 ** (g - 1)) >>> g;
    s = (yr + 2 ** (g - 1)) >>> g;
    if (c > maxv) c = maxv; if (c < -maxv) c = -maxv;
    if (s > maxv) s = maxv; if (s < -maxv) s = -maxv;
  endfunction

  logic [15:0] hist [$];
  int          max_err6 = 0, max_err10 = 0;

  task automatic check_out(input int ow, input int iter, input int lat, input int tol,
                           input int got_c, input int got_s, inout int max_err);
    logic [15:0] a;
    int ec, es, tc, ts, e;
    real th;
    a = hist[hist.size() - 1 - lat];
    model(ow, iter, a, ec, es);
    checks++;
    if (got_c != ec || got_s != es) begin
      failures++;
      if (failures < 10) $display("FAIL %0d/%0d angle=%0d got (%0d,%0d) model (%0d,%0d)",
                                  ow, iter, a, got_c, got_s, ec, es);
    end
    th = 2.0 * 3.14159265358979 * real'(a) / 65536.0;
    tc = int'($floor((2.0 ** (ow - 1) - 1.0) * $cos(th) + 0.5));
    ts = int'($floor((2.0 ** (ow - 1) - 1.0) * $sin(th) + 0.5));
    e = (got_c > tc) ? got_c - tc : tc - got_c;
    if (e > max_err) max_err = e;
    e = (got_s > ts) ? got_s - ts : ts - got_s;
    if (e > max_err) max_err = e;
    checks++;
    if (max_err > tol) begin
      failures++;
      if (failures < 10) $display("FAIL accuracy %0d/%0d angle=%0d got (%0d,%0d) ideal (%0d,%0d)",
                                  ow, iter, a, got_c, got_s, tc, ts);
      max_err = 0;
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    // valid must rise exactly after the latency
    vin = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      angle = (n < 8) ? 16'(n * 16384 / 2) : 16'($urandom);
      hist.push_back(angle);
      @(posedge clk); #1;
      if (n == LAT6 - 2) begin
        checks++; if (v6 !== 1'b0) begin failures++; $display("FAIL v6 early"); end
      end
      if (n == LAT6 - 1) begin
        checks++; if (v6 !== 1'b1) begin failures++; $display("FAIL v6 late"); end
      end
      if (n == LAT10 - 2) begin
        checks++; if (v10 !== 1'b0) begin failures++; $display("FAIL v10 early"); end
      end
      if (n == LAT10 - 1) begin
        checks++; if (v10 !== 1'b1) begin failures++; $display("FAIL v10 late"); end
      end
      // the output now visible belongs to the angle presented LAT-1 clocks before the last one
      if (n >= int'(LAT6)) check_out(6, 3, LAT6 - 1, 5, int'(c6), int'(s6), max_err6);
      if (n >= int'(LAT10)) check_out(10, 10, LAT10 - 1, 2, int'(c10), int'(s10), max_err10);
    end
    $display("max |error| vs ideal: 6b/3it %0d LSB, 10b/10it %0d LSB", max_err6, max_err10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
