// easi_s5_update_tb: self-checking test of stage S5 and the separation matrix.
// Checks the reset value [I 0], element loads through the write port, and the
// update B <- B - G B for isolated and for back-to-back relative gradients.
// The model here keeps its own copy of B: each G B is formed from the copy as
// it is when G is accepted and subtracted LATENCY - 1 = 4 clocks later, which is
// the documented timing of the stage. B and upd_valid are compared every clock.
module easi_s5_update_tb;
  import dr_pkg::*;

  localparam int P = 16, N = 8, LAT = 5;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;
  int checks = 0, failures = 0, cyc = 0;

  logic       in_valid = 0, upd_valid, b_wr_en = 0;
  logic [2:0] b_wr_row = 0;
  logic [3:0] b_wr_col = 0;
  fx_t        b_wr_data = 0;
  fx_t        g [N][N], b [N][P];

  easi_s5_update #(.P(P), .N(N)) dut (.*);

  typedef struct { fx_t d [N][P]; int due; } upd_t;
  upd_t pend [$];
  fx_t  bref [N][P];
  int   back_to_back = 0;

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

  task automatic compare();
    checks++;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < P; j++)
        if (b[i][j] !== bref[i][j]) begin
          failures++; $display("cycle %0d: B[%0d][%0d]=%0d want %0d", cyc, i, j, b[i][j], bref[i][j]);
          return;
        end
  endtask

  // One clock: optionally present G and/or a load, advance, update the model.
  task automatic step(bit gv, bit ld);
    upd_t u;
    bit   due_now;
    in_valid = gv;
    b_wr_en  = ld;
    for (int i = 0; i < N; i++)
      for (int k = 0; k < N; k++)
        g[i][k] = fx_t'($urandom_range(0, 1 << 12)) - fx_t'(1 << 11);   // |g| < 0.03
    if (ld) begin
      b_wr_row  = 3'($urandom);
      b_wr_col  = 4'($urandom);
      b_wr_data = fx_t'($urandom_range(0, 1 << 17)) - fx_t'(1 << 16);
    end
    if (gv) begin
      for (int i = 0; i < N; i++)
        for (int j = 0; j < P; j++) begin
          u.d[i][j] = 0;
          for (int k = 0; k < N; k++) u.d[i][j] += ref_mul(g[i][k], bref[k][j]);
        end
      u.due = cyc + LAT;
      if (pend.size() != 0 && pend[$].due == u.due - 1) back_to_back++;
      pend.push_back(u);
    end
    tick();
    due_now = 0;
    if (pend.size() != 0 && pend[0].due == cyc) begin
      u = pend.pop_front();
      due_now = 1;
      for (int i = 0; i < N; i++)
        for (int j = 0; j < P; j++) bref[i][j] -= u.d[i][j];
    end
    if (ld) bref[b_wr_row][b_wr_col] = b_wr_data;
    checks++;
    if (upd_valid !== due_now) begin failures++; $display("cycle %0d: upd_valid=%0b want %0b", cyc, upd_valid, due_now); end
    compare();
  endtask

  initial begin
    tick(); rst_n = 1; tick();
    for (int i = 0; i < N; i++)
      for (int j = 0; j < P; j++) bref[i][j] = (i == j) ? fx_t'(65536) : fx_t'(0);
    compare();
    // load a random matrix
    for (int n = 0; n < 200; n++) step(0, 1);
    // isolated updates
    for (int n = 0; n < 10; n++) begin
      step(1, 0);
      repeat (LAT + 1) step(0, 0);
    end
    // back-to-back and random updates, with loads mixed in
    for (int n = 0; n < 100; n++) step(1, 0);
    for (int n = 0; n < 200; n++) step($urandom % 2, ($urandom % 8) == 0);
    repeat (LAT + 1) step(0, 0);
    checks++;
    if (back_to_back == 0) begin failures++; $display("no back-to-back updates"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
