// cordic -- pipelined rotation-mode CORDIC: phase in, cosine (I) and sine (Q) out.
//
// The tone generator turns each accumulated phase into a sample of cos/sin with shift-and-add
// iterations only, one iteration per pipeline stage, so a new phase is accepted every clock.
// The source design's optimized configuration is OUT_W = 6 bits and ITER = 3 iterations (the
// original firmware used 10 bits and 10 iterations; both are parameter settings of this module).
//
// How it works (the stage structure is this design's own, the source gives only the function):
//  * stage 0 (pre-rotation): the 16-bit angle (1 LSB = 1/65536 turn) is offset by 1/8 turn; its
//    two top bits select a quadrant q and the remainder, re-centred, is a residual angle in
//    [-45 deg, +45 deg). The vector starts at (X0, 0) with X0 = full scale / K (K = CORDIC gain
//    of ITER iterations) so no output scaling multiplier is needed.
//  * stages 1..ITER: micro-rotation i by +-atan(2^-i), direction from the sign of the residual.
//    As the residual is already within +-45 deg, the classic first step of 45 deg (i = 0) is
//    not needed: the iterations use i = 1..ITER, which cover +-47.7 deg with 3 iterations and
//    leave a residual of at most atan(2^-ITER) (7.1 deg for ITER = 3).
//  * last stage: rotation of the result by q*90 deg (swaps and negations), rounding of the
//    GUARD extra bits and clamping to +-(2^(OUT_W-1)-1).
// Timing: latency ITER+2 clocks, throughput one sample per clock. Outputs are two's complement.
// `valid_out` follows `valid_in` through the pipeline. The residual angle after ITER iterations
// is the accuracy limit that the source trades for resources. Measured over all 65536 angles,
// 6 bits / 3 iterations give about 23 dB SINAD and 29 dB SFDR, 10 bits / 10 iterations about
// 59 dB and 74 dB.
module cordic
  import concerto_pkg::*;
#(
  parameter int unsigned OUT_W = CORDIC_W,
  parameter int unsigned ITER  = CORDIC_ITER,
  parameter int unsigned GUARD = 3
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    valid_in,
  input  logic [15:0]             angle,      // 1 LSB = 2*pi/65536
  output logic                    valid_out,
  output logic signed [OUT_W-1:0] cos_out,    // I
  output logic signed [OUT_W-1:0] sin_out     // Q
);

  localparam int unsigned IW = OUT_W + GUARD + 2;   // internal width, room for the CORDIC gain
  localparam int unsigned ZW = 17;                  // residual angle, signed

  // Start amplitude: (2^(OUT_W-1)-1) * 2^GUARD / K, K = prod over i = 1..ITER of sqrt(1 + 2^-2i)
  function automatic int x0_value();
    real k;
    k = 1.0;
    for (int i = 1; i <= int'(ITER); i++) k = k * $sqrt(1.0 + 2.0 ** (-2.0 * i));
    return int'($floor((2.0 ** (OUT_W - 1) - 1.0) * (2.0 ** GUARD) / k + 0.5));
  endfunction
  localparam int X0 = x0_value();

  logic signed [IW-1:0] x [ITER+1];
  logic signed [IW-1:0] y [ITER+1];
  logic signed [ZW-1:0] z [ITER+1];
  logic        [1:0]    q [ITER+1];
  logic                 v [ITER+1];

  // Stage 0: quadrant split
  logic [15:0] a_off;
  assign a_off = angle + 16'h2000;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x[0] <= '0; y[0] <= '0; z[0] <= '0; q[0] <= '0; v[0] <= 1'b0;
    end else begin
      x[0] <= IW'(X0);
      y[0] <= '0;
      z[0] <= ZW'(signed'({1'b0, a_off[13:0]})) - ZW'(signed'(17'sh2000));
      q[0] <= a_off[15:14];
      v[0] <= valid_in;
    end
  end

  // Stages 1..ITER: micro-rotations
  for (genvar i = 0; i < int'(ITER); i++) begin : g_stage
    logic signed [IW-1:0] xs, ys;
    logic                 pos;
    assign xs  = x[i] >>> (i + 1);
    assign ys  = y[i] >>> (i + 1);
    assign pos = ~z[i][ZW-1];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        x[i+1] <= '0; y[i+1] <= '0; z[i+1] <= '0; q[i+1] <= '0; v[i+1] <= 1'b0;
      end else begin
        x[i+1] <= pos ? x[i] - ys : x[i] + ys;
        y[i+1] <= pos ? y[i] + xs : y[i] - xs;
        z[i+1] <= pos ? z[i] - ZW'(ATAN_LUT[i+1]) : z[i] + ZW'(ATAN_LUT[i+1]);
        q[i+1] <= q[i];
        v[i+1] <= v[i];
      end
    end
  end

  // Last stage: quadrant rotation, rounding, clamping
  function automatic logic signed [OUT_W-1:0] round_clamp(input logic signed [IW-1:0] a);
    logic signed [IW:0] r;
    localparam int MAXV = 2 ** (OUT_W - 1) - 1;
    r = (IW+1)'(a) + (IW+1)'(2 ** (GUARD - 1));
    r = r >>> GUARD;
    if (r > (IW+1)'(MAXV))       return OUT_W'(MAXV);
    else if (r < -(IW+1)'(MAXV)) return OUT_W'(-MAXV);
    else                         return OUT_W'(r);
  endfunction

  logic signed [IW-1:0] xf, yf, c_rot, s_rot;
  assign xf = x[ITER];
  assign yf = y[ITER];

  always_comb begin
    unique case (q[ITER])
      2'd0:    begin c_rot =  xf; s_rot =  yf; end
      2'd1:    begin c_rot = -yf; s_rot =  xf; end
      2'd2:    begin c_rot = -xf; s_rot = -yf; end
      default: begin c_rot =  yf; s_rot = -xf; end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cos_out   <= '0;
      sin_out   <= '0;
      valid_out <= 1'b0;
    end else begin
      cos_out   <= round_clamp(c_rot);
      sin_out   <= round_clamp(s_rot);
      valid_out <= v[ITER];
    end
  end

  initial begin
    assert (ITER >= 1 && ITER < ATAN_LEN) else $fatal(1, "cordic: ITER out of range");
    assert (OUT_W >= 3) else $fatal(1, "cordic: OUT_W too small");
  end

endmodule
