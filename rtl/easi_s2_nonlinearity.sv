// easi_s2_nonlinearity: stage S2 of the EASI pipeline, g(y) = y^3.
//
// Two ranks of N multipliers, as drawn in stage S2 of the paper's pipeline
// figure: the first squares every y_i, the second multiplies the square by y_i
// again. y itself is delayed alongside so that y and g(y) leave together.
// The cubic nonlinearity is the one the paper names for its EASI algorithm.
//
// LATENCY = 2; one vector per clock.
module easi_s2_nonlinearity
  import dr_pkg::*;
#(
  parameter int unsigned N = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  fx_t  y     [N],
  output logic out_valid,
  output fx_t  y_out [N],
  output fx_t  g     [N]
);

  fx_t sq [N];
  fx_t y1 [N];
  logic [1:0] vld;

  always_ff @(posedge clk) begin
    for (int unsigned i = 0; i < N; i++) begin
      sq[i]    <= fx_mul(y[i], y[i]);
      y1[i]    <= y[i];
      g[i]     <= fx_mul(sq[i], y1[i]);
      y_out[i] <= y1[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[0], in_valid};
  end
  assign out_valid = vld[1];

endmodule
