// dr_top: reconfigurable dimensionality-reduction engine, a random-projection
// module followed by an EASI module.
//
// x (M features) -> random projection v = R x (P features) -> EASI y = B v
// (N features), with B trained on line by the EASI update. Run-time modes:
//   random projection only      read v / v_valid (EASI output unused)
//   PCA whitening               rp_bypass=1, so_en=1, hos_en=0
//   ICA (EASI)                  rp_bypass=1, so_en=1, hos_en=1
//   random projection + EASI    rp_bypass=0, so_en=0, hos_en=1  (the main mode)
//   random projection + PCA     rp_bypass=0, so_en=1, hos_en=0
// train_en selects training (B updated by every vector) or inference only.
// With rp_bypass the EASI module sees x[0..P-1]; running PCA or ICA on all M
// inputs needs a build with P >= M.
//
// The split into a random-projection module followed by an EASI module, the
// five algorithms it serves and the term multiplexers follow the published
// design; the port set, the mode struct and the load ports are this design's.
// Default sizes are the evaluated hardware point: M = 32 inputs, P = 16
// intermediate and N = 8 output features. Arithmetic is Q15.16 fixed point
// (the paper used 32-bit floating point). Everything is fully pipelined, one
// vector per clock, no back-pressure. Latencies: v after
// 1 + ceil(log2 M) clocks (6), y 1 + ceil(log2 P) clocks after v (11 from x),
// and a training vector (the last of its mini-batch) updates B
// 10 + ceil(log2 P) + ceil(log2 N) clocks after v (23 from x at the defaults).
module dr_top
  import dr_pkg::*;
#(
  parameter int unsigned M     = 32,
  parameter int unsigned P     = 16,
  parameter int unsigned N     = 8,
  parameter int unsigned BATCH = 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  mode_t                mode,
  input  fx_t                  mu,
  // random-projection matrix load
  input  logic                 r_wr_en,
  input  logic [$clog2(P)-1:0] r_wr_row,
  input  rp_code_t             r_wr_data [M],
  // separation-matrix load / read-back
  input  logic                 b_wr_en,
  input  logic [$clog2(N)-1:0] b_wr_row,
  input  logic [$clog2(P)-1:0] b_wr_col,
  input  fx_t                  b_wr_data,
  output fx_t                  b         [N][P],
  output logic                 upd_valid,
  // data stream
  input  logic                 in_valid,
  input  fx_t                  x         [M],
  output logic                 v_valid,
  output fx_t                  v         [P],
  output logic                 y_valid,
  output fx_t                  y         [N]
);

  random_projection #(.M(M), .P(P)) u_rp (
    .clk, .rst_n,
    .r_wr_en, .r_wr_row, .r_wr_data,
    .bypass(mode.rp_bypass),
    .in_valid, .x,
    .out_valid(v_valid), .v
  );

  easi_core #(.P(P), .N(N), .BATCH(BATCH)) u_easi (
    .clk, .rst_n, .mu,
    .so_en(mode.so_en), .hos_en(mode.hos_en), .train_en(mode.train_en),
    .in_valid(v_valid), .z(v),
    .y_valid, .y,
    .b_wr_en, .b_wr_row, .b_wr_col, .b_wr_data,
    .b, .upd_valid
  );

endmodule
