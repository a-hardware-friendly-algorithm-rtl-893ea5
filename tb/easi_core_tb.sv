// easi_core_tb: test of the five-stage EASI pipeline on its own (P = 16,
// N = 8) with a mini-batch of 2, so that stage S4 accumulates two scaled
// gradients before each update of B.
//
// A cycle-accurate reference model keeps its own B. For a vector z accepted in
// clock c it computes y = B z (due at c + 5) and, when training, g = y^3, H and
// mu H; the second vector of each batch adds its mu H to the first, G B is
// formed from the model's B in clock c + 12 and subtracted in clock c + 17. y,
// B and upd_valid are compared every clock. PCA, ICA and rotation-only modes
// are each run with isolated and back-to-back vectors, then inference only.
module easi_core_tb;
  import dr_pkg::*;

  localparam int P = 16, N = 8;
  localparam int LAT_V = 0, LAT_Y = 5, LAT_READ = 12, LAT_WR = 5;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;
  int checks = 0, failures = 0, cyc = 0;

  mode_t      mode;
  fx_t        mu;
  logic       so_en, hos_en, train_en;
  logic       b_wr_en = 0;
  logic [2:0] b_wr_row = 0;
  logic [3:0] b_wr_col = 0;
  fx_t        b_wr_data = 0;
  fx_t        b [N][P];
  logic       upd_valid;
  logic       in_valid = 0;
  fx_t        z [P];
  logic       y_valid;
  fx_t        y [N];

  assign so_en = mode.so_en;
  assign hos_en = mode.hos_en;
  assign train_en = mode.train_en;

  easi_core #(.P(P), .N(N), .BATCH(2)) dut (.*);

  // ---------------- reference model ----------------
  fx_t bref  [N][P];

  typedef struct { fx_t y [N]; int due; } yexp_t;
  typedef struct { fx_t z [P]; int at; mode_t m; fx_t mu; } zev_t;     // vector entering EASI
  typedef struct { fx_t g [N][N]; int at; } rd_t;                    // G B read
  typedef struct { fx_t d [N][P]; int at; } wr_t;                    // B write

  yexp_t yq [$];
  zev_t  zq [$];
  rd_t   rq [$];
  wr_t   wq [$];

  // mechanism counters
  int n_pca = 0, n_ica = 0, n_rot = 0, n_infer = 0;
  int n_update = 0, n_overlap = 0, n_bload = 0;
  // mini-batch accumulation
  fx_t acc [N][N];
  int  nacc = 0;

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
            acc[i][k] = ((nacc == 0) ? fx_t'(0) : acc[i][k]) + ref_mul(e.mu, hh);
          end
        nacc++;
        if (nacc == 2) begin
          nacc = 0;
          r.g = acc;
          r.at = cyc + LAT_READ;
          rq.push_back(r);
        end
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
    if (gv) begin
      zev_t ze;
      for (int j = 0; j < P; j++) z[j] = fx_t'($urandom_range(0, 1 << 17)) - fx_t'(1 << 16);  // [-1, 1)
      ze.z = z; ze.at = cyc; ze.m = mode; ze.mu = mu;
      zq.push_back(ze);
      model_clock(wrote);   // the vector is taken at the coming edge: model it now
      if (mode.train_en) begin
        if (mode.so_en && !mode.hos_en) n_pca++;
        if (mode.so_en &&  mode.hos_en) n_ica++;
        if (!mode.so_en && mode.hos_en) n_rot++;
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
    mode = '{rp_bypass: 1'b1, so_en: 1'b1, hos_en: 1'b0, train_en: 1'b1};
    mu   = fx_t'(66);   // about 0.001
    for (int j = 0; j < P; j++) z[j] = 0;
    @(posedge clk); #1;
    @(posedge clk); #1;
    rst_n = 1;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < P; j++) bref[i][j] = (i == j) ? fx_t'(65536) : fx_t'(0);
    // PCA whitening: isolated vectors, then a stream
    run(6, 95);
    run(60, 10);
    // ICA (full EASI)
    mode = '{rp_bypass: 1'b1, so_en: 1'b1, hos_en: 1'b1, train_en: 1'b1};
    run(60, 0);
    // rotation-only EASI
    mode = '{rp_bypass: 1'b0, so_en: 1'b0, hos_en: 1'b1, train_en: 1'b1};
    mu = fx_t'(655);
    run(60, 20);
    // load B, then inference only
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
    run(40, 0);

    checks++;
    if (upd_seen != n_update) begin failures++; $display("upd_valid pulses %0d, model updates %0d", upd_seen, n_update); end
    $display("mechanisms: pca=%0d ica=%0d rot=%0d infer=%0d update=%0d overlap=%0d bload=%0d",
             n_pca, n_ica, n_rot, n_infer, n_update, n_overlap, n_bload);
    begin
      int cnt [7];
      cnt = '{n_pca, n_ica, n_rot, n_infer, n_update, n_overlap, n_bload};
      foreach (cnt[k]) begin
        checks++;
        if (cnt[k] == 0) begin failures++; $display("mechanism %0d never happened", k); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
