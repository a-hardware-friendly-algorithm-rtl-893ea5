// easi_s5_update: stage S5 of the EASI pipeline and the separation matrix B.
//
// Holds B (N x P) and applies the update B <- B - G B. Rank 1 forms all
// N*N*P products g_ik * b_kj; N*P tree adders sum each group of N; the last
// rank (N*P subtractors) writes B - (G B) back into the register. These are
// the multiplier groups of size n, the tree adders and the m*n adders drawn in
// stage S5 of the paper's pipeline figure.
//
// Timing: G B is formed from B as it is at the clock edge where in_valid is
// high; the result is subtracted from B as it is LATENCY - 1 clocks later, at
// the edge where upd_valid goes high. When updates follow each other every
// clock, each one is therefore computed from a matrix that misses the last few
// updates (delayed gradient), but none is lost. In the same way stage S1 keeps
// reading B while updates are in flight. The paper runs the pipeline at one
// sample per clock and does not say how it handles this dependence; applying
// the delayed update incrementally is this design's choice.
//
// B resets to [I 0] (ones on the leading diagonal). b_wr_* writes one element
// (for loading a trained model); it takes priority over an update of that
// element in the same clock. LATENCY = 2 + ceil(log2(N)).
module easi_s5_update
  import dr_pkg::*;
#(
  parameter int unsigned P = 16,
  parameter int unsigned N = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  fx_t                  g        [N][N],
  input  logic                 b_wr_en,
  input  logic [$clog2(N)-1:0] b_wr_row,
  input  logic [$clog2(P)-1:0] b_wr_col,
  input  fx_t                  b_wr_data,
  output fx_t                  b        [N][P],
  output logic                 upd_valid
);

  localparam int unsigned TREE    = (N <= 1) ? 0 : $clog2(N);
  localparam int unsigned LATENCY = 2 + TREE;

  fx_t prod [N][P][N];
  fx_t gb   [N][P];
  logic [LATENCY-2:0] vld;

  always_ff @(posedge clk) begin
    for (int unsigned i = 0; i < N; i++)
      for (int unsigned j = 0; j < P; j++)
        for (int unsigned k = 0; k < N; k++)
          prod[i][j][k] <= fx_mul(g[i][k], b[k][j]);
  end

  for (genvar i = 0; i < N; i++) begin : g_row
    for (genvar j = 0; j < P; j++) begin : g_col
      tree_adder #(.N(N)) u_tree (.clk(clk), .in(prod[i][j]), .sum(gb[i][j]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= (LATENCY-1)'({vld, in_valid});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      upd_valid <= 1'b0;
      for (int unsigned i = 0; i < N; i++)
        for (int unsigned j = 0; j < P; j++)
          b[i][j] <= (i == j) ? FX_ONE : '0;
    end else begin
      upd_valid <= vld[LATENCY-2];
      if (vld[LATENCY-2]) begin
        for (int unsigned i = 0; i < N; i++)
          for (int unsigned j = 0; j < P; j++)
            b[i][j] <= b[i][j] - gb[i][j];
      end
      if (b_wr_en) b[b_wr_row][b_wr_col] <= b_wr_data;
    end
  end

  // An element write must address an existing element of B.
  a_wr_in_range: assert property (@(posedge clk) disable iff (!rst_n)
                                  b_wr_en |-> (int'(b_wr_row) < N && int'(b_wr_col) < P));

endmodule
