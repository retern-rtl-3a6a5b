// tcim_controller_tb: runs several multiplies and checks that reads visit
// every (bit, group, column) exactly once in bit -> group -> column order,
// that the accumulate controls follow the read controls by one cycle, that
// done comes 258 cycles after start and that start is ignored while busy.
module tcim_controller_tb;
  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done, clr, rd_en, acc_en;
  logic [2:0] bit_sel, acc_bit, col_sel, acc_col;
  logic [1:0] grp_sel;
  int checks = 0, failures = 0;

  tcim_controller #(.ACT_BITS(8), .NGRP(4), .COLS_PER_SET(8)) dut (
    .clk, .rst_n, .start, .busy, .done, .clr, .rd_en, .bit_sel, .grp_sel, .col_sel,
    .acc_en, .acc_bit, .acc_col);
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, nread, nacc, prev_b, prev_c;
    logic prev_rd;
    #12 rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      @(negedge clk); start = 1;
      #1; checks++; if (!clr) failures++;
      @(negedge clk); start = (run == 1);     // a start while busy must be ignored
      cyc = 1; nread = 0; nacc = 0; prev_rd = 0; prev_b = 0; prev_c = 0;
      while (!done && cyc < 1000) begin
        if (acc_en) begin
          nacc++;
          checks++;
          if (!prev_rd || int'(acc_bit) != prev_b || int'(acc_col) != prev_c) failures++;
        end
        if (rd_en) begin
          checks++;
          if (int'(bit_sel) != nread / 32 || int'(grp_sel) != (nread / 8) % 4 || int'(col_sel) != nread % 8) begin
            failures++; $display("FAIL order at read %0d", nread);
          end
          nread++;
        end
        prev_rd = rd_en; prev_b = int'(bit_sel); prev_c = int'(col_sel);
        @(negedge clk); start = 0; cyc++;
      end
      checks++;
      if (cyc != 258 || nread != 256 || nacc != 256) begin
        failures++; $display("FAIL run=%0d cycles=%0d reads=%0d accs=%0d", run, cyc, nread, nacc);
      end
      @(negedge clk);
      checks++; if (busy) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
