// tb_loghd_ctrl: self-checking test of the inference sequencer.
// Runs 30 queries of 3 beats (D = 24, 8 lanes) against C = 5 classes, with
// random gaps in q_valid and random res_ready back-pressure. A monitor checks
// cycle by cycle that: beats read bundle rows 0..ROWS-1 in order; mac_en and
// mac_first follow each accepted beat by one cycle; the C profiles are read
// in order on consecutive cycles and reach the decoder one cycle later with
// dec_first on class 0; no beat is accepted between the last beat and the
// result being taken; res_valid holds until res_ready. With q_valid held high
// the latency from first beat to res_valid must be ROWS + C + 2 cycles.
module tb_loghd_ctrl;
  localparam int unsigned C = 5, D = 24, LANES = 8;
  localparam int unsigned ROWS = D / LANES;
  localparam int unsigned RW = 2, CW = 3;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic          rst_n = 1'b0, q_valid = 1'b0, res_ready = 1'b0;
  logic          q_ready, row_rd_en, mac_en, mac_first, prof_rd_en;
  logic          dec_en, dec_first, res_valid;
  logic [RW-1:0] row_rd_addr;
  logic [CW-1:0] prof_rd_class, dec_cls;
  int checks = 0, failures = 0;

  loghd_ctrl #(.C(C), .D(D), .LANES(LANES)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("%0t: %s", $time, what);
    end
  endtask

  // Cycle-by-cycle monitor.
  bit   p_accept, p_first, p_prof_en, p_res_valid, p_res_ready;
  int   exp_row = 0, exp_cls = 0, results = 0;
  logic [CW-1:0] p_cls;
  bit   waiting = 0;  // between last beat and result taken
  always @(posedge clk) if (rst_n) begin
    bit accept;
    accept = q_valid && q_ready;
    check(mac_en == p_accept, "mac_en does not follow accept");
    if (p_accept) check(mac_first == p_first, "mac_first wrong");
    check(dec_en == p_prof_en, "dec_en does not follow profile read");
    if (p_prof_en) begin
      check(dec_cls == p_cls, "dec_cls does not follow profile class");
      check(dec_first == (p_cls == 0), "dec_first wrong");
    end
    if (p_res_valid && !p_res_ready) check(res_valid, "res_valid dropped before res_ready");
    check(row_rd_en == accept, "row read without beat");
    if (accept) begin
      check(!waiting, "beat accepted while a query is being decoded");
      check(int'(row_rd_addr) == exp_row, "row order");
      exp_row = (exp_row + 1) % ROWS;
      if (exp_row == 0) begin waiting = 1; exp_cls = 0; end
    end
    if (prof_rd_en) begin
      check(int'(prof_rd_class) == exp_cls, "profile order");
      exp_cls++;
    end
    if (res_valid && res_ready) begin
      check(exp_cls == C, "result before all classes were read");
      waiting = 0;
      results++;
    end
    p_accept    = accept;
    p_first     = accept && row_rd_addr == 0;
    p_prof_en   = prof_rd_en;
    p_cls       = prof_rd_class;
    p_res_valid = res_valid;
    p_res_ready = res_ready;
  end

  // Stimulus.
  initial begin
    int t0, lat;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int q = 0; q < 30; q++) begin
      bit steady;
      steady = (q % 3 == 0);
      // Send ROWS beats.
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        if (!steady) while ($urandom_range(2) == 0) begin q_valid = 1'b0; @(negedge clk); end
        q_valid = 1'b1;
        while (!q_ready) @(negedge clk);
        if (r == 0) t0 = int'($time / 10);
      end
      @(negedge clk);
      q_valid = steady ? 1'b1 : 1'b0;   // keep offering: must not be taken
      res_ready = steady;
      while (!res_valid) begin
        if (!steady) res_ready = ($urandom_range(1) == 1);
        @(negedge clk);
      end
      if (steady) begin
        lat = int'($time / 10) - t0;
        check(lat == ROWS + C + 2, $sformatf("latency %0d, expected %0d", lat, ROWS + C + 2));
      end
      if (!steady) while ($urandom_range(2) != 0) begin res_ready = 1'b0; @(negedge clk); end
      res_ready = 1'b1;
      @(negedge clk);
      res_ready = 1'b0;
      q_valid = 1'b0;
    end
    repeat (3) @(negedge clk);
    check(results == 30, $sformatf("%0d results, expected 30", results));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
