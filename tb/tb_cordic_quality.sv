// tb_cordic_quality -- spectral quality of the CORDIC tone source, SINAD and SFDR, for the
// configurations the source design compares: 6 bits / 3 iterations (the chosen one),
// 10 bits / 10 iterations (the original) and 10 bits / 7 iterations.
//
// Each instance is fed every angle 0..65535 once, in order, so its output sequence is one
// period of the complex tone cos + j*sin sampled at every angle code. A radix-2 FFT of the
// 65536 complex outputs (written below) gives the spectrum: bin 1 is the wanted tone; every
// other bin (DC, the image at -1, harmonics, quantization products) is unwanted.
//   SINAD = 10*log10(|X[1]|^2 / sum of |X[k]|^2 over k != 1)
//   SFDR  = 10*log10(|X[1]|^2 / max of |X[k]|^2 over k != 1)
// Because the CORDIC output depends only on the angle, this is the spectrum of any tone whose
// phase sequence visits every angle code once per period. Checks: each configuration is at
// least as good as the values read from the source's SINAD/SFDR plot (less 0.5 dB of reading
// error): 6/3: SFDR 26.1, SINAD 16.3 dB; 10/10: SFDR 49.8, SINAD 41.8 dB; 10/7: SFDR 50.0,
// SINAD 39.1 dB. The latency ITER + 2 is checked through valid_out.
module tb_cordic_quality;
  localparam int N = 65536;
  localparam int LOGN = 16;
  localparam real PI = 3.14159265358979;

  logic clk = 1'b0, rst_n = 1'b0, vin = 1'b0;
  logic [15:0] angle = '0;
  logic v63, v1010, v107;
  logic signed [5:0] c63, s63;
  logic signed [9:0] c1010, s1010, c107, s107;
  int checks = 0, failures = 0;

  cordic #(.OUT_W(6),  .ITER(3))  dut63   (.clk, .rst_n, .valid_in(vin), .angle,
                                           .valid_out(v63), .cos_out(c63), .sin_out(s63));
  cordic #(.OUT_W(10), .ITER(10)) dut1010 (.clk, .rst_n, .valid_in(vin), .angle,
                                           .valid_out(v1010), .cos_out(c1010), .sin_out(s1010));
  cordic #(.OUT_W(10), .ITER(7))  dut107  (.clk, .rst_n, .valid_in(vin), .angle,
                                           .valid_out(v107), .cos_out(c107), .sin_out(s107));

  always #2 clk = ~clk;

  initial begin : watchdog
    repeat (N + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real re63 [N], im63 [N], re1010 [N], im1010 [N], re107 [N], im107 [N];
  int  n63 = 0, n1010 = 0, n107 = 0;
  int  cyc = 0, first63 = -1, first1010 = -1, first107 = -1;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (v63 && n63 < N) begin
      if (first63 < 0) first63 = cyc;
      re63[n63] = real'(c63); im63[n63] = real'(s63); n63++;
    end
    if (v1010 && n1010 < N) begin
      if (first1010 < 0) first1010 = cyc;
      re1010[n1010] = real'(c1010); im1010[n1010] = real'(s1010); n1010++;
    end
    if (v107 && n107 < N) begin
      if (first107 < 0) first107 = cyc;
      re107[n107] = real'(c107); im107[n107] = real'(s107); n107++;
    end
  end

  // In-place iterative radix-2 decimation-in-time FFT, forward (exp(-j...)).
  function automatic void fft(ref real re [N], ref real im [N]);
    int  j, len, half;
    real wr, wi, ur, ui, tr, ti, ang;
    j = 0;
    for (int i = 0; i < N - 1; i++) begin
      if (i < j) begin
        tr = re[i]; re[i] = re[j]; re[j] = tr;
        ti = im[i]; im[i] = im[j]; im[j] = ti;
      end
      begin
        int m = N >> 1;
        while (m >= 1 && (j & m) != 0) begin j ^= m; m >>= 1; end
        j |= m;
      end
    end
    len = 2;
    for (int s = 0; s < LOGN; s++) begin
      half = len / 2;
      for (int k = 0; k < half; k++) begin
        ang = -2.0 * PI * real'(k) / real'(len);
        wr = $cos(ang); wi = $sin(ang);
        for (int b = 0; b < N; b += len) begin
          ur = re[b + k]; ui = im[b + k];
          tr = re[b + k + half] * wr - im[b + k + half] * wi;
          ti = re[b + k + half] * wi + im[b + k + half] * wr;
          re[b + k] = ur + tr;        im[b + k] = ui + ti;
          re[b + k + half] = ur - tr; im[b + k + half] = ui - ti;
        end
      end
      len *= 2;
    end
  endfunction

  function automatic void quality(ref real re [N], ref real im [N], output real sinad,
                                  output real sfdr);
    real p1, p, psum, pmax;
    fft(re, im);
    p1 = re[1] * re[1] + im[1] * im[1];
    psum = 0.0; pmax = 0.0;
    for (int k = 0; k < N; k++) if (k != 1) begin
      p = re[k] * re[k] + im[k] * im[k];
      psum += p;
      if (p > pmax) pmax = p;
    end
    sinad = 10.0 * $log10(p1 / psum);
    sfdr  = 10.0 * $log10(p1 / pmax);
  endfunction

  task automatic judge(input string name, input real sinad, input real sfdr,
                       input real min_sinad, input real min_sfdr);
    $display("%s: SINAD %5.1f dB (reference %4.1f), SFDR %5.1f dB (reference %4.1f)", name,
             sinad, min_sinad, sfdr, min_sfdr);
    checks += 2;
    if (sinad < min_sinad - 0.5) begin failures++; $display("FAIL %s SINAD", name); end
    if (sfdr < min_sfdr - 0.5)   begin failures++; $display("FAIL %s SFDR", name); end
  endtask

  initial begin
    real sinad, sfdr;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    vin = 1'b1;
    for (int a = 0; a < N; a++) begin
      angle = 16'(a);
      @(posedge clk); #1;
    end
    vin = 1'b0;
    repeat (20) @(posedge clk);
    #1;
    // the first angle entered on cycle 1, so its result appears on cycle 1 + ITER + 2
    checks += 5;
    if (n63 != N || n1010 != N || n107 != N) begin
      failures++; $display("FAIL sample counts %0d %0d %0d", n63, n1010, n107);
    end
    if (first63 != 1 + 3 + 2)    begin failures++; $display("FAIL 6/3 latency %0d", first63); end
    if (first1010 != 1 + 10 + 2) begin failures++; $display("FAIL 10/10 latency %0d", first1010); end
    if (first107 != 1 + 7 + 2)   begin failures++; $display("FAIL 10/7 latency %0d", first107); end
    if (v63 || v1010 || v107)    begin failures++; $display("FAIL valid still high"); end
    quality(re63, im63, sinad, sfdr);
    judge("6 bits, 3 iterations", sinad, sfdr, 16.3, 26.1);
    quality(re1010, im1010, sinad, sfdr);
    judge("10 bits, 10 iterations", sinad, sfdr, 41.8, 49.8);
    quality(re107, im107, sinad, sfdr);
    judge("10 bits, 7 iterations", sinad, sfdr, 39.1, 50.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
