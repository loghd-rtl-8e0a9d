// tb_similarity_unit: self-checking test of the activation (dot-product) unit.
// Streams random queries and bundle rows, 6 beats of 8 lanes for 3 bundles,
// with random gaps between beats, and compares the accumulated dot products
// with sums computed here in plain integer arithmetic. Then sweeps act_shift
// and checks the rescaled, saturated activations, including shifts small
// enough to saturate at both ends of the 8-bit range.
module tb_similarity_unit;
  localparam int unsigned N = 3, D = 48, W = 8, QW = 8, PW = 8, LANES = 8;
  localparam int unsigned ROWS  = D / LANES;
  localparam int unsigned ACC_W = W + QW + $clog2(D);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                        rst_n = 1'b0, mac_en = 1'b0, mac_first = 1'b0;
  logic [LANES-1:0][QW-1:0]    q_chunk = '0;
  logic [N-1:0][LANES*W-1:0]   m_rows = '0;
  logic [4:0]                  act_shift = '0;
  logic [N-1:0][ACC_W-1:0]     acc;
  logic [N-1:0][PW-1:0]        act;
  int checks = 0, failures = 0, sat_hi = 0, sat_lo = 0;

  similarity_unit #(.N(N), .D(D), .W(W), .QW(QW), .PW(PW), .LANES(LANES)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat_shift(longint v, int sh);
    longint s;
    s = v >>> sh;
    if (s > 127) return 127;
    if (s < -128) return -128;
    return int'(s);
  endfunction

  initial begin
    longint ref_dot [N];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int q = 0; q < 12; q++) begin
      // Queries 0-1 use extreme values so that saturation is reachable.
      for (int j = 0; j < N; j++) ref_dot[j] = 0;
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        mac_en = 1'b1; mac_first = (r == 0);
        for (int i = 0; i < LANES; i++) begin
          int qv;
          qv = (q < 2) ? ((q == 0) ? 127 : -128) : $urandom_range(255) - 128;
          q_chunk[i] = QW'(qv);
          for (int j = 0; j < N; j++) begin
            int mv;
            mv = (q < 2) ? 127 - 255 * (j % 2) : $urandom_range(255) - 128;
            m_rows[j][i*W +: W] = W'(mv);
            ref_dot[j] += longint'(qv) * longint'(mv);
          end
        end
        if ($urandom_range(3) == 0) begin
          @(negedge clk); mac_en = 1'b0;
          q_chunk = '1;   // must be ignored
        end
      end
      @(negedge clk); mac_en = 1'b0;
      for (int j = 0; j < N; j++) begin
        checks++;
        if ($signed(acc[j]) != ref_dot[j]) begin
          failures++;
          $display("query %0d bundle %0d: acc %0d expected %0d", q, j, $signed(acc[j]), ref_dot[j]);
        end
      end
      for (int sh = 0; sh < 24; sh += 3) begin
        act_shift = 5'(sh);
        #1;
        for (int j = 0; j < N; j++) begin
          int e;
          e = sat_shift(ref_dot[j], sh);
          if (e == 127 && (ref_dot[j] >>> sh) > 127) sat_hi++;
          if (e == -128 && (ref_dot[j] >>> sh) < -128) sat_lo++;
          checks++;
          if ($signed(act[j]) != e) begin
            failures++;
            $display("query %0d bundle %0d shift %0d: act %0d expected %0d", q, j, sh, $signed(act[j]), e);
          end
        end
      end
    end
    checks++;
    if (sat_hi == 0 || sat_lo == 0) begin
      failures++;
      $display("saturation not exercised: hi %0d lo %0d", sat_hi, sat_lo);
    end
    $display("saturations: high %0d low %0d", sat_hi, sat_lo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
