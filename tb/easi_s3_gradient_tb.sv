// easi_s3_gradient_tb: self-checking test of stage S3, the per-sample gradient
//   H = so_en (y y^T - I) + hos_en (g y^T - y g^T).
// Streams random (y, g) pairs under all four settings of the two term
// multiplexers and compares H with the matrix computed here. Latency 3 clocks.
// Also checks that with only the higher-order term H is antisymmetric.
module easi_s3_gradient_tb;
  import dr_pkg::*;

  localparam int N = 8, LAT = 3;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;
  int checks = 0, failures = 0, cyc = 0;

  logic in_valid = 0, out_valid, so_en = 0, hos_en = 0;
  fx_t  y [N], g [N], h [N][N];

  easi_s3_gradient #(.N(N)) dut (.*);

  typedef struct { fx_t h [N][N]; int due; bit anti; } exp_t;
  exp_t q [$];

  function automatic fx_t ref_mul(fx_t a, fx_t c);
    longint p;
    p = longint'(a) * longint'(c) + 64'sd32768;
    return fx_t'(p >>> 16);
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick();
    @(posedge clk); #1; cyc++;
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin y[i] = 0; g[i] = 0; end
    tick(); rst_n = 1; tick();
    for (int mode = 0; mode < 4; mode++) begin
      so_en = mode[0]; hos_en = mode[1];
      for (int t = 0; t < 100 + LAT + 1; t++) begin
        exp_t e;
        in_valid = (t < 100) && ($urandom % 4 != 0);
        for (int i = 0; i < N; i++) begin
          y[i] = fx_t'($urandom_range(0, 1 << 19)) - fx_t'(1 << 18);
          g[i] = fx_t'($urandom_range(0, 1 << 19)) - fx_t'(1 << 18);
        end
        if (in_valid) begin
          for (int i = 0; i < N; i++)
            for (int j = 0; j < N; j++) begin
              fx_t s, o;
              s = ref_mul(y[i], y[j]) - ((i == j) ? fx_t'(65536) : fx_t'(0));
              o = ref_mul(g[i], y[j]) - ref_mul(g[j], y[i]);
              e.h[i][j] = (so_en ? s : 0) + (hos_en ? o : 0);
            end
          e.due = cyc + LAT;
          e.anti = hos_en && !so_en;
          q.push_back(e);
        end
        tick();
        if (out_valid) begin
          checks++;
          if (q.size() == 0) begin failures++; $display("unexpected output"); end
          else begin
            e = q.pop_front();
            if (cyc != e.due) begin failures++; $display("latency %0d want %0d", cyc, e.due); end
            for (int i = 0; i < N; i++)
              for (int j = 0; j < N; j++)
                if (h[i][j] !== e.h[i][j]) begin
                  failures++; $display("mode %0d H[%0d][%0d]=%0d want %0d", mode, i, j, h[i][j], e.h[i][j]);
                  i = N; break;
                end
            if (e.anti) begin
              checks++;
              for (int i = 0; i < N; i++)
                for (int j = 0; j < N; j++)
                  if (h[i][j] !== -h[j][i]) begin failures++; $display("not antisymmetric"); i = N; break; end
            end
          end
        end
      end
      in_valid = 0;
      checks++;
      if (q.size() != 0) begin failures++; $display("missing outputs"); end
      q.delete();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
