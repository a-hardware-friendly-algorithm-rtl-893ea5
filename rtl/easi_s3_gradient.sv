// easi_s3_gradient: stage S3 of the EASI pipeline, the per-sample gradient
//   H = so_en  * (y y^T - I)  +  hos_en * (g(y) y^T - y g(y)^T).
//
// Rank 1 (2*N^2 multipliers): the outer products y y^T and g(y) y^T.
// Rank 2 (2*N^2 adders): subtract the identity from y y^T, and form the
//   antisymmetric term g y^T - (g y^T)^T; y g(y)^T is the transpose of
//   g(y) y^T, so it needs no multipliers of its own.
// Rank 3 (N^2 adders): add the two terms. A multiplexer in front of each
//   operand drops a term: so_en = 1, hos_en = 0 is PCA whitening (Eq. of the
//   whitening update), both set is EASI/ICA, and so_en = 0, hos_en = 1 is the
//   rotation-only EASI used after random projection.
// The multiplier and adder counts follow stage S3 of the paper's figure; the
// paper states that a multiplexer bypasses the higher-order term for PCA and
// that the second-order term is bypassed after random projection.
//
// LATENCY = 3; one vector per clock. so_en/hos_en are sampled at rank 3.
module easi_s3_gradient
  import dr_pkg::*;
#(
  parameter int unsigned N = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic so_en,
  input  logic hos_en,
  input  fx_t  y   [N],
  input  fx_t  g   [N],
  output logic out_valid,
  output fx_t  h   [N][N]
);

  fx_t yy [N][N];
  fx_t gy [N][N];
  fx_t so [N][N];
  fx_t ho [N][N];
  logic [2:0] vld;

  always_ff @(posedge clk) begin
    for (int unsigned i = 0; i < N; i++)
      for (int unsigned j = 0; j < N; j++) begin
        // rank 1
        yy[i][j] <= fx_mul(y[i], y[j]);
        gy[i][j] <= fx_mul(g[i], y[j]);
        // rank 2
        so[i][j] <= (i == j) ? yy[i][j] - FX_ONE : yy[i][j];
        ho[i][j] <= gy[i][j] - gy[j][i];
        // rank 3
        h[i][j]  <= (so_en ? so[i][j] : '0) + (hos_en ? ho[i][j] : '0);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[1:0], in_valid};
  end
  assign out_valid = vld[2];

endmodule
