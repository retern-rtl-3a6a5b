// col_flip_reg_tb: writes random flip bits to random columns and compares
// the whole register with a shadow copy after every write; checks reset.
module col_flip_reg_tb;
  logic clk = 0, rst_n = 0, we = 0, wbit = 0;
  logic [5:0] waddr = '0;
  logic [63:0] col_flip, shadow;
  int checks = 0, failures = 0;

  col_flip_reg #(.COLS(64)) dut (.clk, .rst_n, .we, .waddr, .wbit, .col_flip);
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    shadow = '0;
    #12 rst_n = 1;
    checks++; if (col_flip !== 64'd0) failures++;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      we = ($urandom_range(0, 3) != 0); waddr = 6'($urandom); wbit = 1'($urandom);
      @(posedge clk); #1;
      if (we) shadow[waddr] = wbit;
      checks++;
      if (col_flip !== shadow) begin
        failures++;
        $display("FAIL i=%0d got=%h exp=%h", i, col_flip, shadow);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
