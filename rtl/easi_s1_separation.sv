// easi_s1_separation: stage S1 of the EASI pipeline, y = B z.
//
// N rows of P multipliers form every product b_ij * z_j in one clock; each row
// is then summed by a pipelined tree adder. This is the layout of stage S1 in
// the paper's pipeline figure (groups of multipliers, each followed by a tree
// adder). B is read from the separation-matrix register at the clock edge that
// captures the products, i.e. the edge at which in_valid is high.
//
// LATENCY = 1 + ceil(log2(P)); one vector per clock.
module easi_s1_separation
  import dr_pkg::*;
#(
  parameter int unsigned P = 16,   // EASI input dimension (intermediate features)
  parameter int unsigned N = 8     // output dimension
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  fx_t  z   [P],
  input  fx_t  b   [N][P],
  output logic out_valid,
  output fx_t  y   [N]
);

  localparam int unsigned LATENCY = 1 + ((P <= 1) ? 0 : $clog2(P));

  fx_t prod [N][P];
  logic [LATENCY-1:0] vld;

  always_ff @(posedge clk) begin
    for (int unsigned i = 0; i < N; i++)
      for (int unsigned j = 0; j < P; j++)
        prod[i][j] <= fx_mul(b[i][j], z[j]);
  end

  for (genvar i = 0; i < N; i++) begin : g_row
    tree_adder #(.N(P)) u_tree (.clk(clk), .in(prod[i]), .sum(y[i]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[LATENCY-2:0], in_valid};
  end
  assign out_valid = vld[LATENCY-1];

endmodule
