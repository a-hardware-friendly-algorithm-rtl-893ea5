// easi_s2_nonlinearity_tb: self-checking test of stage S2, g(y) = y^3.
// Streams random y (with gaps) and checks that g equals the cube computed here
// as two rounded fixed-point products, (y*y)*y, that y is passed through
// unchanged, and that both arrive exactly 2 clocks after their input.
module easi_s2_nonlinearity_tb;
  import dr_pkg::*;

  localparam int N = 8, LAT = 2;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;
  int checks = 0, failures = 0, cyc = 0;

  logic in_valid = 0, out_valid;
  fx_t  y [N], y_out [N], g [N];

  easi_s2_nonlinearity #(.N(N)) dut (.*);

  typedef struct { fx_t y [N]; fx_t g [N]; int due; } exp_t;
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
    for (int i = 0; i < N; i++) y[i] = 0;
    tick(); rst_n = 1; tick();
    for (int t = 0; t < 400 + LAT + 1; t++) begin
      exp_t e;
      in_valid = (t < 400) && ($urandom % 4 != 0);
      for (int i = 0; i < N; i++) y[i] = fx_t'($urandom_range(0, 1 << 19)) - fx_t'(1 << 18);
      if (in_valid) begin
        for (int i = 0; i < N; i++) begin
          e.y[i] = y[i];
          e.g[i] = ref_mul(ref_mul(y[i], y[i]), y[i]);
        end
        e.due = cyc + LAT;
        q.push_back(e);
      end
      tick();
      if (out_valid) begin
        checks++;
        if (q.size() == 0) begin failures++; $display("unexpected output"); end
        else begin
          e = q.pop_front();
          if (cyc != e.due) begin failures++; $display("latency %0d want %0d", cyc, e.due); end
          for (int i = 0; i < N; i++) if (g[i] !== e.g[i] || y_out[i] !== e.y[i]) begin
            failures++; $display("lane %0d: g=%0d want %0d", i, g[i], e.g[i]); break;
          end
        end
      end
    end
    checks++;
    if (q.size() != 0) begin failures++; $display("missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
