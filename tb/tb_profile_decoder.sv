// tb_profile_decoder: self-checking test of the nearest-profile decoder.
// For each round it draws an activation vector and C = 10 profiles (some
// copied from earlier ones to force ties, some at the ends of the 8-bit
// range), presents the profiles one per cycle with random gaps, and checks
// the final class and distance against an argmin computed here, ties going
// to the lowest class index.
module tb_profile_decoder;
  localparam int unsigned C = 10, N = 4, PW = 8, CW = 4;
  localparam int unsigned DIST_W = 2 * (PW + 1) + $clog2(N + 1);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                 rst_n = 1'b0, en = 1'b0, first = 1'b0;
  logic [CW-1:0]        cls = '0;
  logic [N-1:0][PW-1:0] act = '0, prof = '0;
  logic [CW-1:0]        best_cls;
  logic [DIST_W-1:0]    best_dist;
  int checks = 0, failures = 0, ties = 0;

  profile_decoder #(.C(C), .N(N), .PW(PW)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rnd8(int mode);
    if (mode == 0) return $urandom_range(255) - 128;
    if (mode == 1) return ($urandom_range(1) == 1) ? 127 : -128;
    return $urandom_range(40) - 20;
  endfunction

  initial begin
    int a [N];
    int p [C][N];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int round = 0; round < 200; round++) begin
      int mode, exp_cls;
      longint exp_d, d;
      mode = round % 3;
      for (int j = 0; j < N; j++) a[j] = rnd8(mode);
      for (int c = 0; c < C; c++) begin
        if (c > 0 && $urandom_range(3) == 0) p[c] = p[$urandom_range(c-1)];
        else for (int j = 0; j < N; j++) p[c][j] = rnd8(mode);
      end
      exp_cls = 0; exp_d = -1;
      for (int c = 0; c < C; c++) begin
        d = 0;
        for (int j = 0; j < N; j++) d += longint'(a[j] - p[c][j]) * longint'(a[j] - p[c][j]);
        if (exp_d >= 0 && d == exp_d) ties++;
        if (exp_d < 0 || d < exp_d) begin exp_d = d; exp_cls = c; end
      end
      for (int j = 0; j < N; j++) act[j] = PW'(a[j]);
      for (int c = 0; c < C; c++) begin
        @(negedge clk);
        en = 1'b1; first = (c == 0); cls = CW'(c);
        for (int j = 0; j < N; j++) prof[j] = PW'(p[c][j]);
        if ($urandom_range(4) == 0) begin
          @(negedge clk); en = 1'b0; prof = '0;
        end
      end
      @(negedge clk); en = 1'b0;
      checks += 2;
      if (int'(best_cls) != exp_cls || longint'(best_dist) != exp_d) begin
        failures++;
        $display("round %0d: got class %0d dist %0d, expected %0d dist %0d",
                 round, best_cls, best_dist, exp_cls, exp_d);
      end
    end
    checks++;
    if (ties == 0) begin
      failures++;
      $display("no equal distances were exercised");
    end
    $display("equal distances seen: %0d", ties);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
