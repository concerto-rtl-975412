// pipelined_adder -- registered adder tree that sums the N tone samples of a band.
//
// The N signed inputs are padded with zeros to the next power of two and added pairwise, one
// tree level per clock, so an input vector presented at clock t appears summed at the output at
// clock t + LEVELS, LEVELS = ceil(log2 N) (6 for the source's 40 tones). The output is
// W + LEVELS bits wide and never overflows. The tree shape is this design's choice; the source
// gives only the block's name and function ("Pipelined adder", 40 inputs).
module pipelined_adder #(
  parameter int unsigned N = 40,
  parameter int unsigned W = 6,
  localparam int unsigned LEVELS = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned OW     = W + LEVELS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic signed [W-1:0]  din [N],
  output logic signed [OW-1:0] sum
);

  localparam int unsigned P = 2 ** LEVELS;

  // node[l][k]: level l holds P >> l partial sums, all kept at the full output width
  logic signed [OW-1:0] node [LEVELS+1][P];

  always_comb begin
    for (int k = 0; k < int'(P); k++)
      node[0][k] = (k < int'(N)) ? OW'(din[k]) : '0;
  end

  for (genvar l = 0; l < int'(LEVELS); l++) begin : g_level
    for (genvar k = 0; k < int'(P >> (l + 1)); k++) begin : g_node
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) node[l+1][k] <= '0;
        else        node[l+1][k] <= node[l][2*k] + node[l][2*k+1];
      end
    end
    // upper half of each level is unused
    for (genvar k = int'(P >> (l + 1)); k < int'(P); k++) begin : g_pad
      assign node[l+1][k] = '0;
    end
  end

  assign sum = node[LEVELS][0];

endmodule
