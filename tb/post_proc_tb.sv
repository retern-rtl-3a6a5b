// post_proc_tb: exhaustive check of the ReTern post-processing: the result
// must be out_p - out_n for a standard column and out_n - out_p for a
// flipped one.
module post_proc_tb;
  logic [3:0] out_p, out_n;
  logic col_flip;
  logic signed [4:0] out;
  int checks = 0, failures = 0;

  post_proc #(.ADC_BITS(4)) dut (.out_p, .out_n, .col_flip, .out);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp;
    for (int f = 0; f < 2; f++)
      for (int p = 0; p < 16; p++)
        for (int n = 0; n < 16; n++) begin
          out_p = 4'(p); out_n = 4'(n); col_flip = f[0]; #1;
          exp = f ? (n - p) : (p - n);
          checks++;
          if (int'(out) != exp) begin
            failures++;
            $display("FAIL p=%0d n=%0d flip=%0d out=%0d exp=%0d", p, n, f, out, exp);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
