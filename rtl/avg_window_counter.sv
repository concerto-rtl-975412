// avg_window_counter -- sample counter that frames the averaging windows of the tone analyzers.
//
// Counts 0..LEN-1 at the 250 MSPS sample rate and flags the last sample of each window with
// `win_last`. One counter serves all tone analyzers of a band (the source gives the window
// length, 65520, not how it is sequenced; a shared counter is this design's choice).
// Reset starts a window. `count` is the registered position in the window.
module avg_window_counter
  import concerto_pkg::*;
#(
  parameter int unsigned LEN = PERIOD
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic [15:0]       count,
  output logic              win_last
);

  assign win_last = (count == 16'(LEN - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        count <= '0;
    else if (win_last) count <= '0;
    else               count <= count + 16'd1;
  end

  initial assert (LEN >= 2 && LEN <= 65536) else $fatal(1, "avg_window_counter: LEN out of range");

endmodule
