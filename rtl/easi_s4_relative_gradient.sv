// easi_s4_relative_gradient: stage S4 of the EASI pipeline, the relative
// gradient G that stage S5 applies to the separation matrix.
//
// Rank 1 (N^2 multipliers) scales the per-sample gradient by the learning rate:
// mu * H. Rank 2 (N^2 adders) accumulates the scaled gradients of a mini-batch
// of BATCH samples: G = sum over the batch of mu * H_k. When the last sample of
// a batch has been added, out_valid pulses for one clock and G is held until
// the next batch starts. With BATCH = 1 (the default), G = mu * H of every
// sample and the update is the plain EASI rule B <- B - mu H B.
// The paper gives only the name of this stage ("update relative gradient") and
// its N^2 multipliers and N^2 adders; the mini-batch accumulation is this
// design's reading of what the adders do.
//
// LATENCY = 2 (from the batch's last in_valid to out_valid). mu is a fixed-point
// run-time input, sampled at rank 1.
module easi_s4_relative_gradient
  import dr_pkg::*;
#(
  parameter int unsigned N     = 8,
  parameter int unsigned BATCH = 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  fx_t  mu,
  input  fx_t  h   [N][N],
  output logic out_valid,
  output fx_t  g   [N][N]
);

  localparam int unsigned CW = (BATCH <= 1) ? 1 : $clog2(BATCH);

  fx_t          mh [N][N];
  logic         vld_a;
  logic [CW-1:0] cnt;

  always_ff @(posedge clk) begin
    for (int unsigned i = 0; i < N; i++)
      for (int unsigned j = 0; j < N; j++)
        mh[i][j] <= fx_mul(mu, h[i][j]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_a     <= 1'b0;
      cnt       <= '0;
      out_valid <= 1'b0;
      for (int unsigned i = 0; i < N; i++)
        for (int unsigned j = 0; j < N; j++)
          g[i][j] <= '0;
    end else begin
      vld_a     <= in_valid;
      out_valid <= 1'b0;
      if (vld_a) begin
        for (int unsigned i = 0; i < N; i++)
          for (int unsigned j = 0; j < N; j++)
            g[i][j] <= ((cnt == '0) ? '0 : g[i][j]) + mh[i][j];
        if (cnt == CW'(BATCH - 1)) begin
          cnt       <= '0;
          out_valid <= 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

  // The batch counter never passes the batch size.
  a_cnt_in_range: assert property (@(posedge clk) disable iff (!rst_n) int'(cnt) < BATCH);

endmodule
