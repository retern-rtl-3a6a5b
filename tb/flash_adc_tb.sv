// flash_adc_tb: sweeps the input level past full scale and checks that the
// code, one cycle after sampling, is min(level, 15), that it holds while en
// is low, and that reset clears it.
module flash_adc_tb;
  logic clk = 0, rst_n = 0, en = 0;
  logic [6:0] level = '0;
  logic [3:0] code;
  int checks = 0, failures = 0;

  flash_adc #(.ADC_BITS(4), .IN_W(7)) dut (.clk, .rst_n, .en, .level, .code);
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp;
    #12 rst_n = 1;
    checks++; if (code !== 4'd0) failures++;
    for (int l = 0; l < 40; l++) begin
      @(negedge clk); en = 1; level = 7'(l);
      @(negedge clk); en = 0; level = 7'(l + 3);
      exp = (l > 15) ? 15 : l;
      checks++;
      if (int'(code) != exp) begin
        failures++;
        $display("FAIL level=%0d code=%0d exp=%0d", l, code, exp);
      end
      @(negedge clk);
      checks++;
      if (int'(code) != exp) begin
        failures++;
        $display("FAIL hold level=%0d code=%0d", l, code);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
