// easi_core: the five-stage EASI pipeline (training and inference).
//
//   S1  y = B z                         (easi_s1_separation)
//   S2  g(y) = y^3                      (easi_s2_nonlinearity)
//   S3  H = [y y^T - I] + [g y^T - y g^T], terms selectable  (easi_s3_gradient)
//   S4  G = mu * H, accumulated per mini-batch               (easi_s4_relative_gradient)
//   S5  B <- B - G B                    (easi_s5_update)
//
// One input vector z is accepted every clock, with no stall. Every vector
// produces an output y 1 + ceil(log2 P) clocks later (5 at the defaults). When
// train_en is high as the vector leaves S1, it also travels through S2..S5 and,
// if it is the last of its mini-batch, updates B
// 10 + ceil(log2 P) + ceil(log2 N) clocks after it entered (17 at the defaults).
// B is read by S1 and S5 while earlier updates are still in flight; see
// easi_s5_update for how such delayed updates are applied. With train_en low
// the core only infers (y = B z) and B is left alone.
// so_en / hos_en choose the algorithm: PCA whitening (1/0), EASI ICA
// (1/1) or rotation-only EASI after random projection (0/1); they are applied in
// S3, so they should be held while training vectors are in flight.
// The stage split and the operator counts follow the paper's pipeline figure;
// the inter-stage valid bits are this design's own.
module easi_core
  import dr_pkg::*;
#(
  parameter int unsigned P     = 16,
  parameter int unsigned N     = 8,
  parameter int unsigned BATCH = 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 so_en,
  input  logic                 hos_en,
  input  logic                 train_en,
  input  fx_t                  mu,
  input  logic                 in_valid,
  input  fx_t                  z         [P],
  output logic                 y_valid,
  output fx_t                  y         [N],
  input  logic                 b_wr_en,
  input  logic [$clog2(N)-1:0] b_wr_row,
  input  logic [$clog2(P)-1:0] b_wr_col,
  input  fx_t                  b_wr_data,
  output fx_t                  b         [N][P],
  output logic                 upd_valid
);

  fx_t  s2_y [N];
  fx_t  s2_g [N];
  fx_t  s3_h [N][N];
  fx_t  s4_g [N][N];
  logic s2_valid, s3_valid, s4_valid;

  easi_s1_separation #(.P(P), .N(N)) u_s1 (
    .clk, .rst_n, .in_valid, .z, .b,
    .out_valid(y_valid), .y
  );

  easi_s2_nonlinearity #(.N(N)) u_s2 (
    .clk, .rst_n, .in_valid(y_valid & train_en), .y,
    .out_valid(s2_valid), .y_out(s2_y), .g(s2_g)
  );

  easi_s3_gradient #(.N(N)) u_s3 (
    .clk, .rst_n, .in_valid(s2_valid), .so_en, .hos_en,
    .y(s2_y), .g(s2_g),
    .out_valid(s3_valid), .h(s3_h)
  );

  easi_s4_relative_gradient #(.N(N), .BATCH(BATCH)) u_s4 (
    .clk, .rst_n, .in_valid(s3_valid), .mu, .h(s3_h),
    .out_valid(s4_valid), .g(s4_g)
  );

  easi_s5_update #(.P(P), .N(N)) u_s5 (
    .clk, .rst_n, .in_valid(s4_valid), .g(s4_g),
    .b_wr_en, .b_wr_row, .b_wr_col, .b_wr_data,
    .b, .upd_valid
  );

endmodule
