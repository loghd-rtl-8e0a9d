// tb_bundle_mem: self-checking test of the bundle memory.
// Fills every row of every bundle with random words through the write port,
// keeping a copy in the testbench, then reads rows back in random order and
// checks that all n banks return their own word exactly one cycle after
// rd_en, and that rd_data holds while rd_en is low. Small sizes (3 bundles,
// 5 rows of 8 lanes) keep the run short.
module tb_bundle_mem;
  localparam int unsigned N = 3, D = 40, W = 8, LANES = 8;
  localparam int unsigned ROWS = (D + LANES - 1) / LANES;
  localparam int unsigned NW = 2, RW = 3;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                      wr_en = 1'b0, rd_en = 1'b0;
  logic [NW-1:0]             wr_bundle = '0;
  logic [RW-1:0]             wr_row = '0, rd_row = '0;
  logic [LANES*W-1:0]        wr_data = '0;
  logic [N-1:0][LANES*W-1:0] rd_data;
  logic [LANES*W-1:0]        model [N][ROWS];
  int checks = 0, failures = 0;

  bundle_mem #(.N(N), .D(D), .W(W), .LANES(LANES)) dut (.*);

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [LANES*W-1:0] rand_word();
    logic [LANES*W-1:0] w;
    for (int i = 0; i < LANES*W; i += 32) w[i +: 32] = $urandom;
    return w;
  endfunction

  initial begin
    // Load every row of every bank.
    for (int j = 0; j < N; j++) begin
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        wr_en = 1'b1; wr_bundle = NW'(j); wr_row = RW'(r);
        model[j][r] = rand_word();
        wr_data = model[j][r];
      end
    end
    @(negedge clk) wr_en = 1'b0;
    // Overwrite a few rows again.
    repeat (4) begin
      int j, r;
      j = $urandom_range(N-1); r = $urandom_range(ROWS-1);
      @(negedge clk);
      wr_en = 1'b1; wr_bundle = NW'(j); wr_row = RW'(r);
      model[j][r] = rand_word(); wr_data = model[j][r];
    end
    @(negedge clk) wr_en = 1'b0;
    // Random reads, each followed by an idle cycle that must hold the data.
    repeat (40) begin
      int r;
      r = $urandom_range(ROWS-1);
      @(negedge clk); rd_en = 1'b1; rd_row = RW'(r);
      @(negedge clk); rd_en = 1'b0; rd_row = RW'($urandom_range(ROWS-1));
      for (int j = 0; j < N; j++) begin
        checks++;
        if (rd_data[j] !== model[j][r]) begin
          failures++;
          $display("bank %0d row %0d: got %h expected %h", j, r, rd_data[j], model[j][r]);
        end
      end
      @(negedge clk);
      checks++;
      if (rd_data[0] !== model[0][r]) begin
        failures++;
        $display("rd_data did not hold with rd_en low");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
