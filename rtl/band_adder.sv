// band_adder -- sums the NB shifted bands into the single 0..1 GHz comb sent to the DAC.
//
// Lane by lane (8 lanes per clock at 2 GSPS), the I and Q samples of all bands are added and the
// sum is scaled down by 2^SHIFT so that it fits the 16-bit output. SHIFT = 4 (own choice; the
// source gives no DAC word width) makes ten full-scale bands impossible to overflow, so no
// clipping logic is needed. Registered, latency 1 clock.
module band_adder
  import concerto_pkg::*;
#(
  parameter int unsigned NB    = NBANDS,
  parameter int unsigned SHIFT = 4
) (
  input  logic   clk,
  input  logic   rst_n,
  input  wb_iq_t din [NB],
  output wb_iq_t dout
);

  localparam int unsigned SW = WB_W + $clog2(NB + 1);

  wb_iq_t sum;

  always_comb begin
    for (int k = 0; k < int'(LANES); k++) begin
      logic signed [SW-1:0] si, sq;
      si = '0;
      sq = '0;
      for (int b = 0; b < int'(NB); b++) begin
        si = si + SW'(din[b].i[k]);
        sq = sq + SW'(din[b].q[k]);
      end
      sum.i[k] = WB_W'(si >>> SHIFT);
      sum.q[k] = WB_W'(sq >>> SHIFT);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dout <= '0;
    else        dout <= sum;
  end

  initial assert ((2 ** SHIFT) >= NB) else $fatal(1, "band_adder: SHIFT too small for NB bands");

endmodule
