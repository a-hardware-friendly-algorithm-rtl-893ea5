// easi_s4_relative_gradient_tb: self-checking test of stage S4.
// Two instances: the default (mini-batch of 1, G = mu H for every sample) and
// a mini-batch of 3 (G = sum of mu H over three samples, one pulse per batch).
// Random gradients arrive with random gaps; every output G and its timing
// (2 clocks after the batch's last sample) is compared with the model here.
module easi_s4_relative_gradient_tb;
  import dr_pkg::*;

  localparam int N = 8, LAT = 2;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;
  int checks = 0, failures = 0, cyc = 0;

  logic in_valid = 0, v1, v3;
  fx_t  mu, h [N][N], g1 [N][N], g3 [N][N];

  easi_s4_relative_gradient #(.N(N))             dut1 (.clk, .rst_n, .in_valid, .mu, .h, .out_valid(v1), .g(g1));
  easi_s4_relative_gradient #(.N(N), .BATCH(3))  dut3 (.clk, .rst_n, .in_valid, .mu, .h, .out_valid(v3), .g(g3));

  typedef struct { fx_t g [N][N]; int due; } exp_t;
  exp_t q1 [$], q3 [$];
  fx_t  acc [N][N];
  int   nacc = 0;

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

  task automatic check(logic v, const ref fx_t g [N][N], ref exp_t q [$], input string name);
    if (v) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin failures++; $display("%s: unexpected output", name); return; end
      e = q.pop_front();
      if (cyc != e.due) begin failures++; $display("%s: latency %0d want %0d", name, cyc, e.due); end
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++)
          if (g[i][j] !== e.g[i][j]) begin
            failures++; $display("%s: G[%0d][%0d]=%0d want %0d", name, i, j, g[i][j], e.g[i][j]); return;
          end
    end
  endtask

  initial begin
    mu = fx_t'(655);   // about 0.01
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) h[i][j] = 0;
    tick(); rst_n = 1; tick();
    for (int t = 0; t < 300 + LAT + 1; t++) begin
      exp_t e1, e3;
      in_valid = (t < 300) && ($urandom % 3 != 0);
      if (t == 150) mu = fx_t'(3277);  // about 0.05
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++)
          h[i][j] = fx_t'($urandom_range(0, 1 << 20)) - fx_t'(1 << 19);
      if (in_valid) begin
        for (int i = 0; i < N; i++)
          for (int j = 0; j < N; j++) begin
            e1.g[i][j] = ref_mul(mu, h[i][j]);
            acc[i][j]  = ((nacc == 0) ? fx_t'(0) : acc[i][j]) + e1.g[i][j];
          end
        e1.due = cyc + LAT;
        q1.push_back(e1);
        nacc++;
        if (nacc == 3) begin
          e3.g = acc;
          e3.due = cyc + LAT;
          q3.push_back(e3);
          nacc = 0;
        end
      end
      tick();
      check(v1, g1, q1, "batch1");
      check(v3, g3, q3, "batch3");
    end
    checks++;
    if (q1.size() != 0 || q3.size() != 0) begin failures++; $display("missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
