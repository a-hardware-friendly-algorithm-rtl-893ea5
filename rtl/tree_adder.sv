// tree_adder: pipelined binary adder tree.
//
// Sums N fixed-point words. The inputs are padded with zeros to the next power
// of two and reduced pairwise, one tree level per clock with a pipeline register
// after every level, so the clock period does not depend on N. This is the
// "Tree Adder" drawn in stages S1 and S5 of the EASI pipeline; the paper shows
// registers inside the tree, and one register per level is this design's choice.
//
// Interface: in[] is sampled every clock; sum is the total of the in[] presented
// LATENCY = ceil(log2(N)) clocks earlier (0 for N = 1, where sum = in[0]).
// The tree carries no valid bit; the instantiating stage delays its own valid.
// Adds wrap at DATA_W bits. The data registers need no reset.
module tree_adder
  import dr_pkg::*;
#(
  parameter int unsigned N = 8
) (
  input  logic clk,
  input  fx_t  in  [N],
  output fx_t  sum
);

  localparam int unsigned LEVELS = (N <= 1) ? 0 : $clog2(N);
  localparam int unsigned WIDTH  = 1 << LEVELS;

  fx_t lvl [LEVELS+1][WIDTH];

  // Level 0: the inputs, zero padded.
  always_comb begin
    for (int unsigned i = 0; i < WIDTH; i++)
      lvl[0][i] = (i < N) ? in[i] : '0;
  end

  // Levels 1..LEVELS: registered pairwise sums. Entries beyond the live width
  // of a level are kept at zero.
  for (genvar l = 1; l <= LEVELS; l++) begin : g_level
    localparam int unsigned LIVE = WIDTH >> l;
    for (genvar i = 0; i < WIDTH; i++) begin : g_node
      if (i < LIVE) begin : g_add
        always_ff @(posedge clk) lvl[l][i] <= lvl[l-1][2*i] + lvl[l-1][2*i+1];
      end else begin : g_zero
        assign lvl[l][i] = '0;
      end
    end
  end

  assign sum = lvl[LEVELS][0];

endmodule
