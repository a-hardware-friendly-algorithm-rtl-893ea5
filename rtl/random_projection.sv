// random_projection: v = R x with a ternary random matrix R (p x m).
//
// Every element of R is -1, 0 or +1, so the projection needs no multiplier:
// each input is passed, negated or dropped, and each row is summed by a
// pipelined tree adder. R is drawn offline (elements +1 and -1 with probability
// 1/(2p) each, 0 otherwise, as in the published distribution) and written in
// one row per clock through the r_wr_* port; on reset every element is zero.
//
// Stage 0 registers the signed terms; the tree adds ceil(log2(M)) more stages,
// so LATENCY = 1 + ceil(log2(M)). One vector is accepted every clock.
// With bypass = 1 the matrix is replaced by the p x m identity (row i selects
// x[i], rows i >= M give 0): x passes through with the same latency, which lets
// the following EASI stage run on the raw inputs (PCA or ICA without random
// projection). The bypass mechanism is this design's choice; the paper only
// says the hardware can run those algorithms without random projection.
module random_projection
  import dr_pkg::*;
#(
  parameter int unsigned M = 32,   // input features
  parameter int unsigned P = 16    // intermediate features
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // R matrix load: one row per clock
  input  logic                          r_wr_en,
  input  logic [$clog2(P)-1:0]          r_wr_row,
  input  rp_code_t                      r_wr_data [M],
  input  logic                          bypass,
  // data stream
  input  logic                          in_valid,
  input  fx_t                           x         [M],
  output logic                          out_valid,
  output fx_t                           v         [P]
);

  localparam int unsigned LATENCY = 1 + ((M <= 1) ? 0 : $clog2(M));

  rp_code_t r_mem [P][M];
  fx_t      term  [P][M];
  logic [LATENCY-1:0] vld;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < P; i++)
        for (int unsigned j = 0; j < M; j++)
          r_mem[i][j] <= R_ZERO;
    end else if (r_wr_en) begin
      for (int unsigned j = 0; j < M; j++)
        r_mem[r_wr_row][j] <= r_wr_data[j];
    end
  end

  // Stage 0: select +x, -x or 0 for every matrix element.
  always_ff @(posedge clk) begin
    for (int unsigned i = 0; i < P; i++)
      for (int unsigned j = 0; j < M; j++) begin
        rp_code_t c;
        c = bypass ? ((i == j) ? R_POS : R_ZERO) : r_mem[i][j];
        unique case (c)
          R_POS:   term[i][j] <= x[j];
          R_NEG:   term[i][j] <= -x[j];
          default: term[i][j] <= '0;
        endcase
      end
  end

  for (genvar i = 0; i < P; i++) begin : g_row
    tree_adder #(.N(M)) u_tree (.clk(clk), .in(term[i]), .sum(v[i]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[LATENCY-2:0], in_valid};
  end
  assign out_valid = vld[LATENCY-1];

  // A row write must address an existing row.
  a_row_in_range: assert property (@(posedge clk) disable iff (!rst_n)
                                   r_wr_en |-> (int'(r_wr_row) < P));

endmodule
