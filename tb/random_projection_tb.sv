// random_projection_tb: self-checking test of the ternary random projection.
// Loads a random R (codes +1/-1 with probability 1/(2P) each, else 0, as in the
// published distribution, plus a few dense rows so that every code path is
// used), streams one random vector per clock and compares v with R x computed
// here. Checks the latency of 1 + log2(M) = 6 clocks and one vector per clock,
// then repeats in bypass mode, where v must equal x[0..P-1].
module random_projection_tb;
  import dr_pkg::*;

  localparam int M = 32, P = 16, LAT = 6;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;

  int checks = 0, failures = 0, cyc = 0;

  logic            r_wr_en = 0;
  logic [3:0]      r_wr_row = 0;
  rp_code_t        r_wr_data [M];
  logic            bypass = 0;
  logic            in_valid = 0;
  fx_t             x [M];
  logic            out_valid;
  fx_t             v [P];

  random_projection #(.M(M), .P(P)) dut (.*);

  int r_ref [P][M];

  typedef struct { fx_t v [P]; int due; } exp_t;
  exp_t q [$];

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

  task automatic check_out();
    if (out_valid) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin failures++; $display("unexpected output"); return; end
      e = q.pop_front();
      if (cyc != e.due) begin failures++; $display("latency: got cycle %0d want %0d", cyc, e.due); end
      for (int i = 0; i < P; i++) if (v[i] !== e.v[i]) begin
        failures++; $display("v[%0d] = %0d want %0d", i, v[i], e.v[i]); break;
      end
    end
  endtask

  task automatic stream(int n, bit byp);
    bypass = byp;
    for (int t = 0; t < n + LAT + 2; t++) begin
      exp_t e;
      in_valid = (t < n) && (($urandom % 8) != 0);
      for (int j = 0; j < M; j++) x[j] = fx_t'($urandom_range(0, 1 << 20)) - fx_t'(1 << 19);
      if (in_valid) begin
        for (int i = 0; i < P; i++) begin
          e.v[i] = 0;
          for (int j = 0; j < M; j++)
            e.v[i] += byp ? ((i == j) ? x[j] : 0) : fx_t'(r_ref[i][j]) * x[j];
        end
        e.due = cyc + LAT;
        q.push_back(e);
      end
      tick();
      check_out();
    end
    in_valid = 0;
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d outputs missing", q.size()); end
    q.delete();
  endtask

  initial begin
    for (int j = 0; j < M; j++) r_wr_data[j] = R_ZERO;
    for (int j = 0; j < M; j++) x[j] = 0;
    tick(); tick();
    rst_n = 1;
    tick();
    // load R
    for (int i = 0; i < P; i++) begin
      r_wr_en = 1; r_wr_row = 4'(i);
      for (int j = 0; j < M; j++) begin
        int u;
        u = (i < 3) ? int'($urandom % 3) : int'($urandom % (2 * P));
        if (u == 0)      begin r_wr_data[j] = R_POS; r_ref[i][j] = 1;  end
        else if (u == 1) begin r_wr_data[j] = R_NEG; r_ref[i][j] = -1; end
        else             begin r_wr_data[j] = R_ZERO; r_ref[i][j] = 0; end
      end
      tick();
    end
    r_wr_en = 0;
    stream(300, 0);
    stream(100, 1);
    stream(50, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
