// phase_accumulator -- per-tone phase accumulator with a programmable modulus.
//
// Every clock the frequency control word (FCW) is added to the phase, and the sum wraps modulo
// MODULUS. The source design's optimized firmware uses MODULUS = 65520 instead of the natural
// 2^16 wrap of a 16-bit register: the period of every tone then divides 65520, the same length
// as the averaging filter of the tone analyzer, which removes the spurs at fs/5 and 2fs/5. The
// explicit wrap is an add, a compare and a conditional subtract (the extra LUTs the source
// reports). With MODULUS = 2^16 the block behaves as the original plain 16-bit accumulator.
//
// Interface: fcw is sampled every clock (en high); phase is the registered accumulator, range
// 0..MODULUS-1, and is the CORDIC angle in units of 1/2^16 turn. An fcw >= MODULUS is an
// illegal setting (asserted); it is reduced once per clock like any other. Reset clears phase
// to 0 (reset value not given by the source: own choice). `wrap` pulses in the cycle the
// accumulator wraps. Latency: phase(n+1) = (phase(n) + fcw) mod MODULUS, one register.
module phase_accumulator
  import concerto_pkg::*;
#(
  parameter int unsigned W       = FCW_W,
  parameter int unsigned MODULUS = PERIOD
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic [W-1:0] fcw,
  output logic [W-1:0] phase,
  output logic         wrap
);

  logic [W:0] sum;
  logic       over;

  always_comb begin
    sum  = {1'b0, phase} + {1'b0, fcw};
    over = (sum >= (W+1)'(MODULUS));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= '0;
      wrap  <= 1'b0;
    end else if (en) begin
      phase <= over ? W'(sum - (W+1)'(MODULUS)) : sum[W-1:0];
      wrap  <= over;
    end else begin
      wrap  <= 1'b0;
    end
  end

  // An FCW of MODULUS or more is not a valid setting. The assertion is disabled during reset;
  // a linter therefore sees rst_n sampled on the clock as well as used as an asynchronous
  // reset and warns about it (SYNCASYNCNET). No logic uses rst_n synchronously.
  assert property (@(posedge clk) disable iff (!rst_n) en |-> ({1'b0, fcw} < (W+1)'(MODULUS)))
    else $error("phase_accumulator: fcw %0d >= modulus %0d", fcw, MODULUS);

endmodule
