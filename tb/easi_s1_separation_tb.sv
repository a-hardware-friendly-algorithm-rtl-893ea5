// easi_s1_separation_tb: self-checking test of stage S1, y = B z.
// Holds a random B, streams random z (with gaps) and compares every y with the
// matrix-vector product computed here in the same fixed-point format, with a
// new random B for each of four bursts. Latency must be 1 + log2(P) = 5 clocks.
module easi_s1_separation_tb;
  import dr_pkg::*;

  localparam int P = 16, N = 8, LAT = 5;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;
  int checks = 0, failures = 0, cyc = 0;

  logic in_valid = 0, out_valid;
  fx_t  z [P], b [N][P], y [N];

  easi_s1_separation #(.P(P), .N(N)) dut (.*);

  typedef struct { fx_t y [N]; int due; } exp_t;
  exp_t q [$];

  function automatic fx_t ref_mul(fx_t a, fx_t c);
    longint p;
    p = longint'(a) * longint'(c) + 64'sd32768;
    return fx_t'(p >>> 16);
  endfunction

  function automatic fx_t rnd(int range_log2);
    return fx_t'($urandom_range(0, 1 << range_log2)) - fx_t'(1 << (range_log2 - 1));
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
    for (int j = 0; j < P; j++) z[j] = 0;
    tick(); rst_n = 1; tick();
    for (int burst = 0; burst < 4; burst++) begin
      for (int i = 0; i < N; i++) for (int j = 0; j < P; j++) b[i][j] = rnd(18);
      for (int t = 0; t < 100 + LAT + 1; t++) begin
        exp_t e;
        in_valid = (t < 100) && ($urandom % 4 != 0);
        for (int j = 0; j < P; j++) z[j] = rnd(19);
        if (in_valid) begin
          for (int i = 0; i < N; i++) begin
            e.y[i] = 0;
            for (int j = 0; j < P; j++) e.y[i] += ref_mul(b[i][j], z[j]);
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
            for (int i = 0; i < N; i++) if (y[i] !== e.y[i]) begin
              failures++; $display("y[%0d]=%0d want %0d", i, y[i], e.y[i]); break;
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
