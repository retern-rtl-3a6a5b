// shift_accumulator_tb: feeds random partial sums for all bits and columns
// in random order and checks every column result against
// sum psum * 2^b, with the sign-bit (b = 7) contributions subtracted.
module shift_accumulator_tb;
  localparam int C = 64, CPS = 8, NS = 8;
  logic clk = 0, rst_n = 0, clr = 0, acc_en = 0;
  logic [2:0] bit_idx = '0, col_sel = '0;
  logic signed [4:0] psum [NS];
  logic signed [15:0] result [C];
  int exp [C];
  int checks = 0, failures = 0;

  shift_accumulator #(.COLS(C), .COLS_PER_SET(CPS), .ACT_BITS(8), .ADC_BITS(4), .OUT_W(16), .ACT_SIGNED(1'b1))
    dut (.clk, .rst_n, .clr, .acc_en, .bit_idx, .col_sel, .psum, .result);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < NS; s++) psum[s] = '0;
    #12 rst_n = 1;
    for (int rep = 0; rep < 4; rep++) begin
      @(negedge clk); clr = 1;
      for (int c = 0; c < C; c++) exp[c] = 0;
      @(negedge clk); clr = 0;
      for (int b = 0; b < 8; b++)
        for (int g = 0; g < 4; g++)
          for (int k = 0; k < CPS; k++) begin
            acc_en = ($urandom_range(0, 4) != 0);
            bit_idx = 3'(b); col_sel = 3'(k);
            for (int s = 0; s < NS; s++) begin
              psum[s] = 5'($signed($urandom_range(0, 30)) - 15);
              if (acc_en) exp[s * CPS + k] += (b == 7) ? -(int'(psum[s]) <<< b) : (int'(psum[s]) <<< b);
            end
            @(negedge clk);
          end
      acc_en = 0;
      for (int c = 0; c < C; c++) begin
        checks++;
        if (int'(result[c]) != exp[c]) begin
          failures++; $display("FAIL rep=%0d c=%0d got=%0d exp=%0d", rep, c, result[c], exp[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
