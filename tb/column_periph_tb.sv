// column_periph_tb: random bitline levels (0..20, so the ADC clips) and
// flip bits for the 8 columns of a set; for every column select checks
// that one cycle later psum = clip(BL1) - clip(BL2), negated for a flipped
// column, and that the result (including the flip bit it was taken
// with) is held while en is low.
module column_periph_tb;
  logic clk = 0, rst_n = 0, en = 0;
  logic [2:0] col_sel = '0;
  logic [6:0] lvl_bl1 [8], lvl_bl2 [8];
  logic [7:0] flip = '0;
  logic signed [4:0] psum;
  int checks = 0, failures = 0, clipped = 0;

  column_periph #(.COLS_PER_SET(8), .ADC_BITS(4), .IN_W(7)) dut (
    .clk, .rst_n, .en, .col_sel, .lvl_bl1, .lvl_bl2, .flip, .psum);
  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int x, y, exp;
    for (int k = 0; k < 8; k++) begin lvl_bl1[k] = '0; lvl_bl2[k] = '0; end
    #12 rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      for (int k = 0; k < 8; k++) begin
        lvl_bl1[k] = 7'($urandom_range(0, 20));
        lvl_bl2[k] = 7'($urandom_range(0, 20));
      end
      flip = 8'($urandom); col_sel = 3'($urandom); en = 1;
      x = int'(lvl_bl1[col_sel]); y = int'(lvl_bl2[col_sel]);
      if (x > 15 || y > 15) clipped++;
      x = (x > 15) ? 15 : x; y = (y > 15) ? 15 : y;
      exp = flip[col_sel] ? (y - x) : (x - y);
      @(negedge clk); en = 0;
      flip = ~flip;                       // must not affect the sampled result
      checks++;
      if (int'(psum) != exp) begin
        failures++; $display("FAIL t=%0d psum=%0d exp=%0d", t, psum, exp);
      end
      @(negedge clk);                     // held while en is low
      checks++;
      if (int'(psum) != exp) begin
        failures++; $display("FAIL hold t=%0d psum=%0d exp=%0d", t, psum, exp);
      end
    end
    checks++; if (clipped == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
