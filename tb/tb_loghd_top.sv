// tb_loghd_top: end-to-end test of the LogHD inference engine at its default size
// (D = 10,000, C = 26 classes, k = 2, n = 5 bundles, 100 lanes).
//
// The testbench builds a synthetic LogHD model the way the method trains one,
// in integer arithmetic:
//   1. class prototypes H_c: random bipolar (+1/-1) hypervectors;
//   2. codebook: greedy minimax-load selection, each class taking the unused
//      k-ary code that minimises max_j (L_j + g(s_j)), g(s) = s/(k-1),
//      U(w) = w (alpha = 1), random tie-breaking;
//   3. bundles M_j = sum_c g(B_cj) H_c, normalised: every bundle scaled to
//      the same L2 norm, the largest that keeps all elements within 8 bits;
//   4. profiles: the mean activation of 3 noisy training samples per class,
//      computed with the same shift-and-saturate the engine applies.
// Queries are prototypes with 25 % of their signs flipped, scaled to +/-64.
// Every result (class, distance, activations, raw dot products) is compared
// with a reference computed here, and the classification accuracy against
// the true class must reach 90 %. The run makes each mechanism of the engine
// happen and counts it: gaps in the query stream, result back-pressure,
// activation saturation (one query with a too-small act_shift), a model
// reload between queries, and back-to-back queries whose latency must be
// ROWS + C + 2 cycles.
module tb_loghd_top;
  import loghd_pkg::*;

  localparam int unsigned D      = D_DEF;
  localparam int unsigned C      = C_DEF;
  localparam int unsigned K      = K_DEF;
  localparam int unsigned N      = N_DEF;
  localparam int unsigned W      = W_DEF;
  localparam int unsigned QW     = QW_DEF;
  localparam int unsigned PW     = PW_DEF;
  localparam int unsigned LANES  = LANES_DEF;
  localparam int unsigned ROWS   = (D + LANES - 1) / LANES;
  localparam int unsigned RW     = idx_width(ROWS);
  localparam int unsigned NW     = idx_width(N);
  localparam int unsigned CW     = idx_width(C);
  localparam int unsigned ACC_W  = acc_width(W, QW, ROWS * LANES);
  localparam int unsigned DIST_W = dist_width(PW, N);
  localparam int NTRAIN   = 3;     // training samples per class for the profiles
  localparam int NQUERY   = 40;    // test queries
  localparam int FLIP_PCT = 25;    // share of query signs flipped
  localparam int QAMP     = 64;    // query element magnitude

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                      rst_n = 1'b0;
  logic [SHW-1:0]            act_shift = '0;
  logic                      bw_en = 1'b0;
  logic [NW-1:0]             bw_bundle = '0;
  logic [RW-1:0]             bw_row = '0;
  logic [LANES*W-1:0]        bw_data = '0;
  logic                      pw_en = 1'b0;
  logic [CW-1:0]             pw_class = '0;
  logic [N-1:0][PW-1:0]      pw_data = '0;
  logic                      q_valid = 1'b0;
  logic                      q_ready;
  logic [LANES-1:0][QW-1:0]  q_data = '0;
  logic                      res_valid;
  logic                      res_ready = 1'b0;
  logic [CW-1:0]             res_class;
  logic [DIST_W-1:0]         res_dist;
  logic [N-1:0][PW-1:0]      res_act;
  logic [N-1:0][ACC_W-1:0]   res_acc;

  loghd_top dut (.*);

  int checks = 0, failures = 0;
  int n_stall = 0, n_backpressure = 0, n_saturate = 0, n_reload = 0, n_latency = 0;
  int n_correct = 0, n_scored = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- model
  byte     H    [C][D];
  int      code [C][N];
  byte     Mq   [N][D];
  int      prof [C][N];
  byte     q    [D];
  longint  dot  [N];
  int      act_r[N];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("%0t: %s", $time, what);
    end
  endtask

  function automatic int sat_shift(longint v, int sh);
    longint s;
    s = v >>> sh;
    if (s > (1 << (PW - 1)) - 1) return (1 << (PW - 1)) - 1;
    if (s < -(1 << (PW - 1)))    return -(1 << (PW - 1));
    return int'(s);
  endfunction

  task automatic build_model();
    bit used [];
    int load [N];
    int ncand;
    ncand = 1;
    for (int j = 0; j < N; j++) ncand *= K;
    used = new[ncand];
    for (int c = 0; c < C; c++)
      for (int d = 0; d < D; d++) H[c][d] = ($urandom_range(1) == 1) ? 8'sd1 : -8'sd1;
    // Greedy minimax-load codebook over the full candidate set.
    for (int j = 0; j < N; j++) load[j] = 0;
    for (int c = 0; c < C; c++) begin
      longint best_score;
      int     best_s;
      best_score = -1; best_s = 0;
      for (int s = 0; s < ncand; s++) begin
        int v, mx;
        longint score;
        if (used[s]) continue;
        v = s; mx = 0;
        for (int j = 0; j < N; j++) begin
          if (load[j] + v % K > mx) mx = load[j] + v % K;
          v /= K;
        end
        score = longint'(mx) * 1024 + longint'($urandom_range(1023));
        if (best_score < 0 || score < best_score) begin best_score = score; best_s = s; end
      end
      used[best_s] = 1;
      for (int j = 0; j < N; j++) begin
        code[c][j] = best_s % K;
        best_s /= K;
        load[j] += code[c][j];
      end
    end
    // Bundles: weighted superposition, then every bundle scaled to the same
    // L2 norm T (unit vector times T), T as large as lets every element fit
    // in 8 bits.
    begin
      int  mi [N][D];
      real nrm [N];
      real t;
      t = 1.0e30;
      for (int j = 0; j < N; j++) begin
        int mx;
        real ss;
        mx = 0; ss = 0.0;
        for (int d = 0; d < D; d++) begin
          mi[j][d] = 0;
          for (int c = 0; c < C; c++) mi[j][d] += code[c][j] * H[c][d];
          if (mi[j][d] > mx) mx = mi[j][d];
          if (-mi[j][d] > mx) mx = -mi[j][d];
          ss += real'(mi[j][d]) * real'(mi[j][d]);
        end
        nrm[j] = $sqrt(ss);
        if (mx > 0 && 127.0 * nrm[j] / real'(mx) < t) t = 127.0 * nrm[j] / real'(mx);
      end
      for (int j = 0; j < N; j++)
        for (int d = 0; d < D; d++)
          Mq[j][d] = (nrm[j] > 0.0) ? byte'($rtoi(real'(mi[j][d]) * t / nrm[j]
                                              + ((mi[j][d] >= 0) ? 0.5 : -0.5))) : 8'sd0;
    end
  endtask

  task automatic make_query(input int y, input int flip_pct);
    for (int d = 0; d < D; d++) begin
      int s;
      s = int'(H[y][d]);
      if ($urandom_range(99) < flip_pct) s = -s;
      q[d] = byte'(s * QAMP);
    end
  endtask

  task automatic ref_dot();
    for (int j = 0; j < N; j++) begin
      dot[j] = 0;
      for (int d = 0; d < D; d++) dot[j] += longint'(Mq[j][d]) * longint'(q[d]);
    end
  endtask

  // Reference decision: class, distance and activations for the current q.
  task automatic ref_decide(input int sh, output int cls, output longint dmin);
    ref_dot();
    for (int j = 0; j < N; j++) act_r[j] = sat_shift(dot[j], sh);
    cls = 0; dmin = -1;
    for (int c = 0; c < C; c++) begin
      longint dd;
      dd = 0;
      for (int j = 0; j < N; j++) dd += (longint'(act_r[j]) - longint'(prof[c][j])) ** 2;
      if (dmin < 0 || dd < dmin) begin dmin = dd; cls = c; end
    end
  endtask

  // ---------------------------------------------------------------- driving
  task automatic load_bundles();
    for (int j = 0; j < N; j++)
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        bw_en = 1'b1; bw_bundle = NW'(j); bw_row = RW'(r);
        for (int i = 0; i < LANES; i++)
          bw_data[i*W +: W] = (r * LANES + i < D) ? W'(Mq[j][r*LANES+i]) : '0;
      end
    @(negedge clk) bw_en = 1'b0;
  endtask

  task automatic load_profile(input int c);
    @(negedge clk);
    pw_en = 1'b1; pw_class = CW'(c);
    for (int j = 0; j < N; j++) pw_data[j] = PW'(prof[c][j]);
    @(negedge clk) pw_en = 1'b0;
  endtask

  // Stream q into the engine and collect the result. stall: random gaps in
  // q_valid and random res_ready; otherwise back-to-back with latency check.
  task automatic run_query(input bit stall, input int sh, input int true_cls, input bit score);
    int exp_cls, t0, lat;
    longint exp_d;
    ref_decide(sh, exp_cls, exp_d);
    act_shift = SHW'(sh);
    t0 = 0;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      if (stall && r > 0 && $urandom_range(7) == 0) begin
        q_valid = 1'b0;
        q_data  = {LANES{QW'($urandom)}};   // junk that must not be taken
        n_stall++;
        repeat ($urandom_range(3) + 1) @(negedge clk);
      end
      q_valid = 1'b1;
      for (int i = 0; i < LANES; i++)
        q_data[i] = (r * LANES + i < D) ? QW'(q[r*LANES+i]) : '0;
      while (!q_ready) @(negedge clk);
      if (r == 0) t0 = int'($time / 10);
    end
    @(negedge clk);
    q_valid = 1'b0;
    res_ready = !stall;
    while (!res_valid) @(negedge clk);
    lat = int'($time / 10) - t0;
    if (!stall) begin
      check(lat == int'(ROWS + C + 2), $sformatf("latency %0d, expected %0d", lat, ROWS + C + 2));
      n_latency++;
    end else begin
      repeat ($urandom_range(3) + 1) begin
        @(negedge clk);
        check(res_valid, "res_valid dropped before res_ready");
        n_backpressure++;
      end
      res_ready = 1'b1;
    end
    check(int'(res_class) == exp_cls, $sformatf("class %0d, expected %0d", res_class, exp_cls));
    check(longint'(res_dist) == exp_d, $sformatf("distance %0d, expected %0d", res_dist, exp_d));
    for (int j = 0; j < N; j++) begin
      check(longint'($signed(res_acc[j])) == dot[j], $sformatf("dot %0d: %0d expected %0d", j, $signed(res_acc[j]), dot[j]));
      check(int'($signed(res_act[j])) == act_r[j], $sformatf("act %0d: %0d expected %0d", j, $signed(res_act[j]), act_r[j]));
      if (dot[j] >>> sh > (1 << (PW - 1)) - 1 || dot[j] >>> sh < -(1 << (PW - 1))) n_saturate++;
    end
    if (score) begin
      n_scored++;
      if (int'(res_class) == true_cls) n_correct++;
    end
    @(negedge clk);
    res_ready = 1'b0;
  endtask

  // ---------------------------------------------------------------- test
  initial begin
    int sh;
    longint mx;
    build_model();
    // Pick the shift that brings the largest training activation under 100.
    mx = 1;
    for (int c = 0; c < C; c++) begin
      make_query(c, FLIP_PCT);
      ref_dot();
      for (int j = 0; j < N; j++) begin
        if (dot[j] > mx) mx = dot[j];
        if (-dot[j] > mx) mx = -dot[j];
      end
    end
    sh = 0;
    while ((mx >>> sh) > 100) sh++;
    // Profiles: mean activation of NTRAIN samples per class.
    for (int c = 0; c < C; c++) begin
      int sum [N];
      for (int j = 0; j < N; j++) sum[j] = 0;
      for (int t = 0; t < NTRAIN; t++) begin
        make_query(c, FLIP_PCT);
        ref_dot();
        for (int j = 0; j < N; j++) sum[j] += sat_shift(dot[j], sh);
      end
      for (int j = 0; j < N; j++) prof[c][j] = sum[j] / NTRAIN;
    end
    $display("model: D=%0d C=%0d k=%0d n=%0d lanes=%0d act_shift=%0d", D, C, K, N, LANES, sh);

    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load_bundles();
    for (int c = 0; c < C; c++) load_profile(c);

    for (int i = 0; i < NQUERY; i++) begin
      int y;
      y = $urandom_range(C - 1);
      make_query(y, FLIP_PCT);
      run_query(i % 2 == 1, sh, y, 1'b1);
    end
    // Saturation: a query of the class with the heaviest code, with a shift
    // 4 steps too small.
    begin
      int heavy, w, best_w;
      heavy = 0; best_w = -1;
      for (int c = 0; c < C; c++) begin
        w = 0;
        for (int j = 0; j < N; j++) w += code[c][j];
        if (w > best_w) begin best_w = w; heavy = c; end
      end
      make_query(heavy, FLIP_PCT);
      run_query(1'b0, sh - 4, heavy, 1'b0);
    end
    // Model reload: replace one profile between queries, then query again.
    for (int j = 0; j < N; j++) prof[1][j] = -prof[1][j];
    load_profile(1);
    n_reload++;
    make_query(1, FLIP_PCT);
    run_query(1'b0, sh, 1, 1'b0);

    $display("accuracy %0d / %0d", n_correct, n_scored);
    check(n_correct * 10 >= n_scored * 9, "accuracy below 90 %");
    $display("mechanisms: stalls %0d, back-pressure cycles %0d, saturated activations %0d, reloads %0d, latency checks %0d",
             n_stall, n_backpressure, n_saturate, n_reload, n_latency);
    check(n_stall > 0, "query stream never stalled");
    check(n_backpressure > 0, "result back-pressure never happened");
    check(n_saturate > 0, "activation saturation never happened");
    check(n_reload > 0, "model reload never happened");
    check(n_latency > 0, "latency never checked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
