// tb_profile_mem: self-checking test of the activation-profile memory.
// Writes a random n-entry profile for every class, keeps a copy, reads all
// classes back in random order and checks the whole profile arrives one cycle
// after rd_en and holds while rd_en is low.
module tb_profile_mem;
  localparam int unsigned C = 7, N = 3, PW = 8, CW = 3;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                 wr_en = 1'b0, rd_en = 1'b0;
  logic [CW-1:0]        wr_class = '0, rd_class = '0;
  logic [N-1:0][PW-1:0] wr_data = '0;
  logic [N-1:0][PW-1:0] rd_data;
  logic [N-1:0][PW-1:0] model [C];
  int checks = 0, failures = 0;

  profile_mem #(.C(C), .N(N), .PW(PW)) dut (.*);

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < C; c++) begin
      @(negedge clk);
      wr_en = 1'b1; wr_class = CW'(c);
      model[c] = (N*PW)'({$urandom, $urandom});
      wr_data = model[c];
    end
    @(negedge clk) wr_en = 1'b0;
    repeat (50) begin
      int c;
      c = $urandom_range(C-1);
      @(negedge clk); rd_en = 1'b1; rd_class = CW'(c);
      @(negedge clk); rd_en = 1'b0; rd_class = CW'($urandom_range(C-1));
      checks++;
      if (rd_data !== model[c]) begin
        failures++;
        $display("class %0d: got %h expected %h", c, rd_data, model[c]);
      end
      @(negedge clk);
      checks++;
      if (rd_data !== model[c]) begin
        failures++;
        $display("rd_data did not hold with rd_en low");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
