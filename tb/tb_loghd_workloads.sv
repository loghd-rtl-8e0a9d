// tb_loghd_workloads: the engine at its default size running the other model
// shapes the LogHD method is evaluated with, plus bit-flip injection.
//
// The datasets themselves (ISOLET, UCIHAR, PAMAP2, PAGE) are not available to
// a simulation, so each workload is a synthetic model of the same shape:
// C classes, alphabet k, n = ceil(log_k C) bundles and dimension D, built as
// in tb_loghd_top (random bipolar prototypes, greedy minimax-load codebook,
// weighted superposition, equal-norm 8-bit normalisation, mean-activation
// profiles).
// A smaller model is mapped onto the 26-class, 5-bundle, 10,000-dimension
// engine without changing it:
//   - unused bundles and unused dimensions are loaded as zero, which leaves
//     every dot product unchanged and makes the unused activations zero;
//   - unused class slots c >= C hold a copy of class 0's profile. Their
//     distance always equals class 0's, and the decoder keeps the lower index
//     on a tie, so an unused slot can never be the answer.
// Workloads: ISOLET k=3 (C=26, n=3), UCIHAR k=2 at D=2,000 (C=12, n=4),
// UCIHAR k=3 at D=6,000 (C=12, n=3), PAMAP2/PAGE k=3 (C=5, n=2) and k=5
// (C=5, n=1), and ISOLET k=2 (C=26, n=5) with random bit flips written into
// the stored bundles and profiles at 0.5 % and 2 % per bit.
// Checks: every result equals the reference computed here on the stored
// (possibly corrupted) model; no unused class slot is ever returned; clean
// models classify at least 90 % of their queries correctly. Accuracy under
// bit flips is reported, not required.
module tb_loghd_workloads;
  import loghd_pkg::*;

  localparam int unsigned D      = D_DEF;
  localparam int unsigned C      = C_DEF;
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
  localparam int NTRAIN   = 3;
  localparam int NQUERY   = 20;
  localparam int FLIP_PCT = 25;
  localparam int QAMP     = 64;

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

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Current model shape.
  int cu, ku, nu, du;
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
    if (s > 127) return 127;
    if (s < -128) return -128;
    return int'(s);
  endfunction

  task automatic build_model();
    bit used [];
    int load [N];
    int ncand;
    ncand = 1;
    for (int j = 0; j < nu; j++) ncand *= ku;
    used = new[ncand];
    for (int c = 0; c < C; c++)
      for (int d = 0; d < D; d++)
        H[c][d] = (c < cu && d < du) ? (($urandom_range(1) == 1) ? 8'sd1 : -8'sd1) : 8'sd0;
    for (int j = 0; j < N; j++) load[j] = 0;
    for (int c = 0; c < C; c++) for (int j = 0; j < N; j++) code[c][j] = 0;
    for (int c = 0; c < cu; c++) begin
      longint best_score;
      int     best_s;
      best_score = -1; best_s = 0;
      for (int s = 0; s < ncand; s++) begin
        int v, mx;
        longint score;
        if (used[s]) continue;
        v = s; mx = 0;
        for (int j = 0; j < nu; j++) begin
          if (load[j] + v % ku > mx) mx = load[j] + v % ku;
          v /= ku;
        end
        score = longint'(mx) * 1024 + longint'($urandom_range(1023));
        if (best_score < 0 || score < best_score) begin best_score = score; best_s = s; end
      end
      used[best_s] = 1;
      for (int j = 0; j < nu; j++) begin
        code[c][j] = best_s % ku;
        best_s /= ku;
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
          for (int c = 0; c < C; c++) mi[j][d] += code[c][j] * int'(H[c][d]);
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

  task automatic make_query(input int y);
    for (int d = 0; d < D; d++) begin
      int s;
      s = int'(H[y][d]);
      if ($urandom_range(99) < FLIP_PCT) s = -s;
      q[d] = byte'(s * QAMP);
    end
  endtask

  task automatic ref_dot();
    for (int j = 0; j < N; j++) begin
      dot[j] = 0;
      for (int d = 0; d < D; d++) dot[j] += longint'(Mq[j][d]) * longint'(q[d]);
    end
  endtask

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

  // Flip each stored bit with probability ppm / 1,000,000.
  task automatic inject_flips(input int ppm, output int nflip);
    nflip = 0;
    for (int j = 0; j < N; j++)
      for (int d = 0; d < D; d++)
        for (int b = 0; b < W; b++)
          if ($urandom_range(999999) < ppm) begin Mq[j][d][b] = ~Mq[j][d][b]; nflip++; end
    for (int c = 0; c < C; c++)
      for (int j = 0; j < N; j++) begin
        logic [PW-1:0] v;
        v = PW'(prof[c][j]);
        for (int b = 0; b < PW; b++)
          if ($urandom_range(999999) < ppm) begin v[b] = ~v[b]; nflip++; end
        prof[c][j] = int'($signed(v));
      end
  endtask

  task automatic load_model();
    for (int j = 0; j < N; j++)
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        bw_en = 1'b1; bw_bundle = NW'(j); bw_row = RW'(r);
        for (int i = 0; i < LANES; i++)
          bw_data[i*W +: W] = (r * LANES + i < D) ? W'(Mq[j][r*LANES+i]) : '0;
      end
    for (int c = 0; c < C; c++) begin
      @(negedge clk);
      bw_en = 1'b0;
      pw_en = 1'b1; pw_class = CW'(c);
      for (int j = 0; j < N; j++) pw_data[j] = PW'(prof[c][j]);
    end
    @(negedge clk);
    bw_en = 1'b0; pw_en = 1'b0;
  endtask

  task automatic run_query(input int sh, input int true_cls, inout int correct);
    int exp_cls;
    longint exp_d;
    ref_decide(sh, exp_cls, exp_d);
    act_shift = SHW'(sh);
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      q_valid = 1'b1;
      for (int i = 0; i < LANES; i++)
        q_data[i] = (r * LANES + i < D) ? QW'(q[r*LANES+i]) : '0;
      while (!q_ready) @(negedge clk);
    end
    @(negedge clk);
    q_valid = 1'b0;
    res_ready = 1'b1;
    while (!res_valid) @(negedge clk);
    check(int'(res_class) == exp_cls, $sformatf("class %0d, expected %0d", res_class, exp_cls));
    check(longint'(res_dist) == exp_d, $sformatf("distance %0d, expected %0d", res_dist, exp_d));
    for (int j = 0; j < N; j++)
      check(longint'($signed(res_acc[j])) == dot[j], $sformatf("dot %0d mismatch", j));
    check(int'(res_class) < cu, $sformatf("unused class slot %0d returned", res_class));
    if (int'(res_class) == true_cls) correct++;
    @(negedge clk);
    res_ready = 1'b0;
  endtask

  task automatic run_workload(input string name, input int c_, input int k_, input int d_,
                              input int flip_ppm);
    int sh, correct, nflip;
    longint mx;
    cu = c_; ku = k_; du = d_;
    nu = int'(clog_k(c_, k_));
    build_model();
    mx = 1;
    for (int c = 0; c < cu; c++) begin
      make_query(c);
      ref_dot();
      for (int j = 0; j < N; j++) begin
        if (dot[j] > mx) mx = dot[j];
        if (-dot[j] > mx) mx = -dot[j];
      end
    end
    sh = 0;
    while ((mx >>> sh) > 100) sh++;
    for (int c = 0; c < cu; c++) begin
      int sum [N];
      for (int j = 0; j < N; j++) sum[j] = 0;
      for (int t = 0; t < NTRAIN; t++) begin
        make_query(c);
        ref_dot();
        for (int j = 0; j < N; j++) sum[j] += sat_shift(dot[j], sh);
      end
      for (int j = 0; j < N; j++) prof[c][j] = sum[j] / NTRAIN;
    end
    nflip = 0;
    if (flip_ppm > 0) inject_flips(flip_ppm, nflip);
    for (int c = cu; c < C; c++) prof[c] = prof[0];
    load_model();
    correct = 0;
    for (int i = 0; i < NQUERY; i++) begin
      int y;
      y = $urandom_range(cu - 1);
      make_query(y);
      run_query(sh, y, correct);
    end
    $display("%-28s C=%0d k=%0d n=%0d D=%0d flips=%0d ppm (%0d bits): accuracy %0d / %0d",
             name, cu, ku, nu, du, flip_ppm, nflip, correct, NQUERY);
    if (flip_ppm == 0) check(correct * 10 >= NQUERY * 9, {name, ": accuracy below 90 %"});
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_workload("ISOLET-shaped, k=3", 26, 3, 10000, 0);
    run_workload("UCIHAR-shaped, k=2, D=2K", 12, 2, 2000, 0);
    run_workload("UCIHAR-shaped, k=3, D=6K", 12, 3, 6000, 0);
    run_workload("PAMAP2/PAGE-shaped, k=3", 5, 3, 10000, 0);
    run_workload("PAMAP2/PAGE-shaped, k=5", 5, 5, 10000, 0);
    run_workload("ISOLET-shaped, k=2", 26, 2, 10000, 0);
    run_workload("ISOLET-shaped, k=2, flips", 26, 2, 10000, 5000);
    run_workload("ISOLET-shaped, k=2, flips", 26, 2, 10000, 20000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
