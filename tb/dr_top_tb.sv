// dr_top_tb: end-to-end test of the random projection + EASI engine at its
// default sizes (M = 32 inputs, P = 16 intermediate, N = 8 outputs).
//
// A cycle-accurate reference model runs beside the design. Per input vector x
// accepted in clock c it computes v = R x (due at c + 6), y = B v from its own
// copy of B as it stands in clock c + 6 (due at c + 11), and, when training,
// g = y^3, H, G = mu H. G B is formed from the model's B in clock c + 18 and
// subtracted in clock c + 23, the documented pipeline timing, so updates that
// overlap in the pipeline (delayed gradients) are modelled exactly. v, y, B and
// upd_valid are compared every clock.
//
// Phases: load R and exercise every mode: random projection only (inference),
// PCA whitening, ICA (full EASI), random projection + EASI, random projection +
// PCA, each with isolated and back-to-back vectors, plus a B load as used to
// deploy a trained model. Each mechanism is counted and must occur.
module dr_top_tb;
  import dr_pkg::*;

  localparam int M = 32, P = 16, N = 8;
  localparam int LAT_V = 6, LAT_Y = 5, LAT_READ = 12, LAT_WR = 5;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;
  int checks = 0, failures = 0, cyc = 0;

  mode_t      mode;
  fx_t        mu;
  logic       r_wr_en = 0;
  logic [3:0] r_wr_row = 0;
  rp_code_t   r_wr_data [M];
  logic       b_wr_en = 0;
  logic [2:0] b_wr_row = 0;
  logic [3:0] b_wr_col = 0;
  fx_t        b_wr_data = 0;
  fx_t        b [N][P];
  logic       upd_valid;
  logic       in_valid = 0;
  fx_t        x [M];
  logic       v_valid, y_valid;
  fx_t        v [P], y [N];

  dr_top dut (.*);

  // ---------------- reference model ----------------
  int  r_ref [P][M];
  fx_t bref  [N][P];

  typedef struct { fx_t v [P]; int due; } vexp_t;
  typedef struct { fx_t y [N]; int due; } yexp_t;
  typedef struct { fx_t z [P]; int at; mode_t m; fx_t mu; } zev_t;     // vector entering EASI
  typedef struct { fx_t g [N][N]; int at; } rd_t;                    // G B read
  typedef struct { fx_t d [N][P]; int at; } wr_t;                    // B write

  vexp_t vq [$];
  yexp_t yq [$];
  zev_t  zq [$];
  rd_t   rq [$];
  wr_t   wq [$];

  // mechanism counters
  int n_rp = 0, n_bypass = 0, n_pca = 0, n_ica = 0, n_rp_easi = 0, n_infer = 0;
  int n_update = 0, n_overlap = 0, n_bload = 0, n_rload = 0;

  function automatic fx_t ref_mul(fx_t a, fx_t c);
    longint p;
    p = longint'(a) * longint'(c) + 64'sd32768;
    return fx_t'(p >>> 16);
  endfunction

  // Model work for the current clock, after the clock edge. wrote: a B write
  // was applied in this clock (upd_valid must be high).
  task automatic model_clock(output bit wrote);
    wrote = 0;
    // B writes due now
    while (wq.size() != 0 && wq[0].at == cyc) begin
      wr_t w;
      w = wq.pop_front();
      for (int i = 0; i < N; i++) for (int j = 0; j < P; j++) bref[i][j] -= w.d[i][j];
      n_update++;
      wrote = 1;
      if (wq.size() != 0 || rq.size() != 0) n_overlap++;
    end
    // vectors entering EASI now: y = B z and the training chain
    while (zq.size() != 0 && zq[0].at == cyc) begin
      zev_t  e;
      yexp_t ye;
      fx_t   gg [N];
      e = zq.pop_front();
      for (int i = 0; i < N; i++) begin
        ye.y[i] = 0;
        for (int j = 0; j < P; j++) ye.y[i] += ref_mul(bref[i][j], e.z[j]);
      end
      ye.due = cyc + LAT_Y;
      yq.push_back(ye);
      if (e.m.train_en) begin
        rd_t r;
        for (int i = 0; i < N; i++) gg[i] = ref_mul(ref_mul(ye.y[i], ye.y[i]), ye.y[i]);
        for (int i = 0; i < N; i++)
          for (int k = 0; k < N; k++) begin
            fx_t s, o, hh;
            s  = ref_mul(ye.y[i], ye.y[k]) - ((i == k) ? fx_t'(65536) : fx_t'(0));
            o  = ref_mul(gg[i], ye.y[k]) - ref_mul(gg[k], ye.y[i]);
            hh = (e.m.so_en ? s : 0) + (e.m.hos_en ? o : 0);
            r.g[i][k] = ref_mul(e.mu, hh);
          end
        r.at = cyc + LAT_READ;
        rq.push_back(r);
      end else n_infer++;
    end
    // G B reads due now
    while (rq.size() != 0 && rq[0].at == cyc) begin
      rd_t r;
      wr_t w;
      r = rq.pop_front();
      for (int i = 0; i < N; i++)
        for (int j = 0; j < P; j++) begin
          w.d[i][j] = 0;
          for (int k = 0; k < N; k++) w.d[i][j] += ref_mul(r.g[i][k], bref[k][j]);
        end
      w.at = cyc + LAT_WR;
      wq.push_back(w);
    end
  endtask

  task automatic compare_outputs();
    checks++;
    if (v_valid) begin
      if (vq.size() == 0) begin failures++; $display("cycle %0d: unexpected v", cyc); end
      else begin
        vexp_t e;
        e = vq.pop_front();
        if (e.due != cyc) begin failures++; $display("cycle %0d: v latency, due %0d", cyc, e.due); end
        for (int i = 0; i < P; i++) if (v[i] !== e.v[i]) begin
          failures++; $display("cycle %0d: v[%0d]=%0d want %0d", cyc, i, v[i], e.v[i]); break;
        end
      end
    end else if (vq.size() != 0 && vq[0].due <= cyc) begin failures++; $display("cycle %0d: v missing", cyc); void'(vq.pop_front()); end
    if (y_valid) begin
      if (yq.size() == 0) begin failures++; $display("cycle %0d: unexpected y", cyc); end
      else begin
        yexp_t e;
        e = yq.pop_front();
        if (e.due != cyc) begin failures++; $display("cycle %0d: y latency, due %0d", cyc, e.due); end
        for (int i = 0; i < N; i++) if (y[i] !== e.y[i]) begin
          failures++; $display("cycle %0d: y[%0d]=%0d want %0d", cyc, i, y[i], e.y[i]); break;
        end
      end
    end else if (yq.size() != 0 && yq[0].due <= cyc) begin failures++; $display("cycle %0d: y missing", cyc); void'(yq.pop_front()); end
    for (int i = 0; i < N; i++)
      for (int j = 0; j < P; j++)
        if (b[i][j] !== bref[i][j]) begin
          failures++; $display("cycle %0d: B[%0d][%0d]=%0d want %0d", cyc, i, j, b[i][j], bref[i][j]);
          i = N; break;
        end
  endtask

  int upd_seen = 0;

  // One clock. gv: present a random vector.
  task automatic step(bit gv);
    bit wrote;
    in_valid = gv;
    for (int j = 0; j < M; j++) x[j] = fx_t'($urandom_range(0, 1 << 17)) - fx_t'(1 << 16);  // [-1, 1)
    if (gv) begin
      vexp_t ve;
      zev_t  ze;
      for (int i = 0; i < P; i++) begin
        ve.v[i] = 0;
        for (int j = 0; j < M; j++)
          ve.v[i] += mode.rp_bypass ? ((i == j) ? x[j] : fx_t'(0)) : fx_t'(r_ref[i][j]) * x[j];
      end
      ve.due = cyc + LAT_V;
      vq.push_back(ve);
      ze.z = ve.v; ze.at = cyc + LAT_V; ze.m = mode; ze.mu = mu;
      zq.push_back(ze);
      if (mode.rp_bypass) n_bypass++; else n_rp++;
      if (mode.train_en) begin
        if (mode.rp_bypass && mode.so_en && !mode.hos_en) n_pca++;
        if (mode.rp_bypass && mode.so_en &&  mode.hos_en) n_ica++;
        if (!mode.rp_bypass && !mode.so_en && mode.hos_en) n_rp_easi++;
      end
    end
    @(posedge clk); #1; cyc++;
    in_valid = 0;
    if (upd_valid) upd_seen++;
    model_clock(wrote);
    checks++;
    if (upd_valid !== wrote) begin failures++; $display("cycle %0d: upd_valid=%0b want %0b", cyc, upd_valid, wrote); end
    compare_outputs();
  endtask

  task automatic drain();
    repeat (LAT_V + LAT_Y + LAT_READ + LAT_WR + 2) step(0);
  endtask

  task automatic run(int n, int gap_pct);
    for (int t = 0; t < n; t++) step(($urandom % 100) >= gap_pct);
    drain();
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mode = '{rp_bypass: 1'b0, so_en: 1'b0, hos_en: 1'b1, train_en: 1'b0};
    mu   = fx_t'(66);   // about 0.001
    for (int j = 0; j < M; j++) begin r_wr_data[j] = R_ZERO; x[j] = 0; end
    @(posedge clk); #1;
    @(posedge clk); #1;
    rst_n = 1;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < P; j++) bref[i][j] = (i == j) ? fx_t'(65536) : fx_t'(0);
    // R: +1 / -1 with probability 1/(2P) each; guarantee one nonzero per row
    for (int i = 0; i < P; i++) begin
      for (int j = 0; j < M; j++) begin
        int u;
        u = int'($urandom % (2 * P));
        r_ref[i][j] = (u == 0) ? 1 : (u == 1) ? -1 : 0;
      end
      r_ref[i][(2 * i) % M] = ((i % 2) == 0) ? 1 : -1;
      r_wr_en = 1; r_wr_row = 4'(i);
      for (int j = 0; j < M; j++)
        r_wr_data[j] = (r_ref[i][j] == 1) ? R_POS : (r_ref[i][j] == -1) ? R_NEG : R_ZERO;
      step(0);
      n_rload++;
    end
    r_wr_en = 0;
    // 1. random projection only, inference
    run(40, 20);
    // 2. PCA whitening on raw inputs, isolated then streamed
    mode = '{rp_bypass: 1'b1, so_en: 1'b1, hos_en: 1'b0, train_en: 1'b1};
    run(5, 95);
    run(60, 10);
    // 3. ICA (full EASI) on raw inputs
    mode = '{rp_bypass: 1'b1, so_en: 1'b1, hos_en: 1'b1, train_en: 1'b1};
    run(60, 10);
    // 4. random projection followed by rotation-only EASI (main mode)
    mode = '{rp_bypass: 1'b0, so_en: 1'b0, hos_en: 1'b1, train_en: 1'b1};
    mu = fx_t'(655);   // about 0.01
    run(100, 0);
    // 5. random projection followed by PCA whitening
    mode = '{rp_bypass: 1'b0, so_en: 1'b1, hos_en: 1'b0, train_en: 1'b1};
    mu = fx_t'(66);
    run(60, 30);
    // 6. deploy: load a B element by element, then infer
    for (int i = 0; i < N; i++)
      for (int j = 0; j < P; j++) begin
        b_wr_en = 1; b_wr_row = 3'(i); b_wr_col = 4'(j);
        b_wr_data = fx_t'($urandom_range(0, 1 << 16)) - fx_t'(1 << 15);
        bref[i][j] = b_wr_data;
        n_bload++;
        step(0);
      end
    b_wr_en = 0;
    mode.train_en = 1'b0;
    run(50, 0);

    checks++;
    if (upd_seen != n_update) begin failures++; $display("upd_valid pulses %0d, model updates %0d", upd_seen, n_update); end
    $display("mechanisms: rp=%0d bypass=%0d pca=%0d ica=%0d rp_easi=%0d infer=%0d update=%0d overlap=%0d bload=%0d rload=%0d",
             n_rp, n_bypass, n_pca, n_ica, n_rp_easi, n_infer, n_update, n_overlap, n_bload, n_rload);
    begin
      int cnt [10];
      cnt = '{n_rp, n_bypass, n_pca, n_ica, n_rp_easi, n_infer, n_update, n_overlap, n_bload, n_rload};
      foreach (cnt[k]) begin
        checks++;
        if (cnt[k] == 0) begin failures++; $display("mechanism %0d never happened", k); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
