// wordline_driver_tb: latches random activations and checks, for every bit
// and row group, that exactly the rows of that group carry that activation
// bit; checks that rd_en low gives no wordline, wr_all gives all, and that
// the latch holds when act_load is low.
module wordline_driver_tb;
  localparam int R = 64, AB = 8, PW = 16;
  logic clk = 0, rst_n = 0, act_load = 0, rd_en = 0, wr_all = 0;
  logic [R-1:0][AB-1:0] act_in, act_ref;
  logic [2:0] bit_sel = '0;
  logic [1:0] grp_sel = '0;
  logic [R-1:0] wl, exp;
  int checks = 0, failures = 0;

  wordline_driver #(.ROWS(R), .ACT_BITS(AB), .PWA_ROWS(PW)) dut (
    .clk, .rst_n, .act_load, .act_in, .rd_en, .bit_sel, .grp_sel, .wr_all, .wl);
  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    act_in = '0;
    #12 rst_n = 1;
    for (int t = 0; t < 10; t++) begin
      @(negedge clk);
      for (int r = 0; r < R; r++) act_in[r] = 8'($urandom);
      act_ref = act_in; act_load = 1;
      @(negedge clk); act_load = 0;
      for (int r = 0; r < R; r++) act_in[r] = 8'($urandom);   // must not be taken
      for (int b = 0; b < AB; b++)
        for (int g = 0; g < R / PW; g++) begin
          bit_sel = 3'(b); grp_sel = 2'(g); rd_en = 1; #1;
          for (int r = 0; r < R; r++) exp[r] = (r >= g * PW && r < (g + 1) * PW) ? act_ref[r][b] : 1'b0;
          checks++;
          if (wl !== exp) begin
            failures++; $display("FAIL t=%0d b=%0d g=%0d wl=%h exp=%h", t, b, g, wl, exp);
          end
          rd_en = 0; #1;
          checks++; if (wl !== '0) failures++;
        end
      wr_all = 1; #1;
      checks++; if (wl !== '1) failures++;
      wr_all = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
