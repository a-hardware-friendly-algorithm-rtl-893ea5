// waveform_24_16_tb: the Waveform-style training test of waveform_workload_tb
// on the evaluation's larger configuration, random projection 32 -> 24 followed
// by EASI to 16 outputs (dr_top built with P = 24, N = 16; P is not a power of
// two, so the adder trees are padded). Same data and phases. With twice as many
// outputs, and so more off-diagonal pairs estimated from the same 1000 test
// vectors, the off-diagonal limit is 0.2 instead of 0.15.
//
// Data: the benchmark is not shipped; vectors are generated here following the
// generator's public description. Three triangular base waves of height 6 over
// 21 points (peaks at points 7, 15 and 11); a vector of class k mixes two of
// them with a uniform weight u, u*ha + (1-u)*hb, and adds unit Gaussian noise;
// 19 pure-noise features follow, of which the last 8 are dropped, leaving 32.
// Gaussians are sums of 12 uniforms minus 6. 4000 training and 1000 test
// vectors; the training mean is removed and features are scaled by 1/2.
//
// Phase 1: random projection + PCA whitening, 3 passes over the training set at
// one vector per clock (delayed updates in full use), mu = 2^-9.
// Phase 2: random projection + rotation-only EASI, 1 pass, mu = 2^-14 (twice as many outputs feed each rotation step).
// After each phase the test set is run in inference mode and the covariance of
// y is measured: diagonal within 1 +/- 0.25, off-diagonal below 0.2 in
// magnitude. Phase 2 must change B (a rotation happened) yet keep y white.
module waveform_24_16_tb;
  import dr_pkg::*;

  localparam int M = 32, P = 24, N = 16;
  localparam int NTRAIN = 4000, NTEST = 1000;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;
  int checks = 0, failures = 0;

  mode_t      mode;
  fx_t        mu;
  logic       r_wr_en = 0;
  logic [$clog2(P)-1:0] r_wr_row = 0;
  rp_code_t   r_wr_data [M];
  logic       b_wr_en = 0;
  logic [$clog2(N)-1:0] b_wr_row = 0;
  logic [$clog2(P)-1:0] b_wr_col = 0;
  fx_t        b_wr_data = 0;
  fx_t        b [N][P];
  logic       upd_valid;
  logic       in_valid = 0;
  fx_t        x [M];
  logic       v_valid, y_valid;
  fx_t        v [P], y [N];

  dr_top #(.M(M), .P(P), .N(N)) dut (.*);

  real data [NTRAIN + NTEST][M];
  real ysum [N], ycov [N][N];
  int  ycount;
  int  updates = 0;

  always @(posedge clk) if (rst_n && upd_valid) updates++;

  always @(posedge clk) if (y_valid && !mode.train_en) begin
    for (int i = 0; i < N; i++) begin
      ysum[i] += $itor(y[i]) / 65536.0;
      for (int j = 0; j < N; j++) ycov[i][j] += ($itor(y[i]) / 65536.0) * ($itor(y[j]) / 65536.0);
    end
    ycount++;
  end

  function automatic real gauss();
    real s;
    s = 0.0;
    for (int k = 0; k < 12; k++) s += $itor($urandom_range(0, 1000000)) / 1000000.0;
    return s - 6.0;
  endfunction

  function automatic real hwave(int w, int i);  // i = 1..21
    int peak;
    real d;
    peak = (w == 0) ? 7 : (w == 1) ? 15 : 11;
    d = 6.0 - ((i > peak) ? $itor(i - peak) : $itor(peak - i));
    return (d > 0.0) ? d : 0.0;
  endfunction

  task automatic make_data();
    real mean [M];
    for (int j = 0; j < M; j++) mean[j] = 0.0;
    for (int s = 0; s < NTRAIN + NTEST; s++) begin
      int  cls, a, c;
      real u;
      cls = int'($urandom % 3);
      a = (cls == 2) ? 1 : 0;
      c = (cls == 0) ? 1 : 2;
      u = $itor($urandom_range(0, 1000000)) / 1000000.0;
      for (int j = 0; j < M; j++)
        data[s][j] = ((j < 21) ? u * hwave(a, j + 1) + (1.0 - u) * hwave(c, j + 1) : 0.0) + gauss();
      if (s < NTRAIN) for (int j = 0; j < M; j++) mean[j] += data[s][j] / NTRAIN;
    end
    for (int s = 0; s < NTRAIN + NTEST; s++)
      for (int j = 0; j < M; j++) data[s][j] = (data[s][j] - mean[j]) * 0.5;
  endtask

  task automatic drive(int first, int count);
    for (int s = first; s < first + count; s++) begin
      in_valid = 1;
      for (int j = 0; j < M; j++) x[j] = fx_t'($rtoi(data[s][j] * 65536.0));
      @(posedge clk); #1;
    end
    in_valid = 0;
    repeat (30) @(posedge clk);
    #1;
  endtask

  task automatic measure(string phase);
    for (int i = 0; i < N; i++) begin
      ysum[i] = 0.0;
      for (int j = 0; j < N; j++) ycov[i][j] = 0.0;
    end
    ycount = 0;
    mode.train_en = 1'b0;
    drive(NTRAIN, NTEST);
    checks++;
    if (ycount != NTEST) begin failures++; $display("%s: %0d outputs, want %0d", phase, ycount, NTEST); end
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        real c;
        c = ycov[i][j] / ycount - (ysum[i] / ycount) * (ysum[j] / ycount);
        checks++;
        if ((i == j && (c < 0.75 || c > 1.25)) || (i != j && (c > 0.2 || c < -0.2))) begin
          failures++; $display("%s: cov(y%0d, y%0d) = %f", phase, i, j, c);
        end
      end
    $display("%s: cov diag = %f %f %f %f %f %f %f %f", phase,
             ycov[0][0] / ycount, ycov[1][1] / ycount, ycov[2][2] / ycount, ycov[3][3] / ycount,
             ycov[4][4] / ycount, ycov[5][5] / ycount, ycov[6][6] / ycount, ycov[7][7] / ycount);
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fx_t b_before [N][P];
    real bdist;
    mode = '{rp_bypass: 1'b0, so_en: 1'b1, hos_en: 1'b0, train_en: 1'b0};
    mu = fx_t'(128);   // 2^-9
    for (int j = 0; j < M; j++) begin r_wr_data[j] = R_ZERO; x[j] = 0; end
    make_data();
    @(posedge clk); #1;
    rst_n = 1;
    // R: +/-1 with probability 1/(2P) each, at least one nonzero per row
    for (int i = 0; i < P; i++) begin
      r_wr_en = 1; r_wr_row = ($clog2(P))'(i);
      for (int j = 0; j < M; j++) begin
        int u;
        u = int'($urandom % (2 * P));
        r_wr_data[j] = (u == 0) ? R_POS : (u == 1) ? R_NEG : R_ZERO;
      end
      r_wr_data[i % M] = R_POS;   // distinct for P <= M: no two rows coincide
      @(posedge clk); #1;
    end
    r_wr_en = 0;

    // phase 1: random projection + PCA whitening
    mode = '{rp_bypass: 1'b0, so_en: 1'b1, hos_en: 1'b0, train_en: 1'b1};
    repeat (3) drive(0, NTRAIN);
    checks++;
    if (updates != 3 * NTRAIN) begin failures++; $display("updates %0d, want %0d", updates, 3 * NTRAIN); end
    measure("after PCA whitening");

    // phase 2: rotation-only EASI
    b_before = b;
    mu = fx_t'(4);     // 2^-14
    mode = '{rp_bypass: 1'b0, so_en: 1'b0, hos_en: 1'b1, train_en: 1'b1};
    drive(0, NTRAIN);
    bdist = 0.0;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < P; j++) bdist += ($itor(b[i][j] - b_before[i][j]) / 65536.0) ** 2;
    $display("rotation phase moved B by %f (Frobenius)", $sqrt(bdist));
    checks++;
    if ($sqrt(bdist) < 0.01) begin failures++; $display("rotation phase did not change B"); end
    measure("after rotation");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
