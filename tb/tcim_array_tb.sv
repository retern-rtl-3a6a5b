// tcim_array_tb: programs every column of a 64x64 array with random cell
// states under a random fault map (~10 % of elements stuck), then applies
// random wordline patterns and checks every column's BL1/BL2 levels against
// counts worked out from the written states and the faults.
module tcim_array_tb;
  import tcim_pkg::*;
  localparam int R = 64, C = 64;
  logic clk = 0;
  logic [R-1:0] wl;
  logic [C-1:0] col_we;
  logic [R-1:0][1:0] wdata;
  cell_saf_t saf [R][C];
  logic [6:0] lvl_bl1 [C], lvl_bl2 [C];
  logic [1:0] m_eff [R][C];
  logic [1:0] written [R][C];
  int checks = 0, failures = 0;

  tcim_array #(.ROWS(R), .COLS(C)) dut (.clk, .wl, .col_we, .wdata, .saf, .lvl_bl1, .lvl_bl2, .m_eff);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic eff(logic v, saf_e f);
    return (f == SAF_SA1) ? 1'b1 : (f == SAF_SA0) ? 1'b0 : v;
  endfunction

  initial begin
    int e1, e2;
    wl = '0; col_we = '0; wdata = '0;
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        saf[r][c].m1 = ($urandom_range(0, 9) == 0) ? saf_e'($urandom_range(1, 2)) : SAF_NONE;
        saf[r][c].m2 = ($urandom_range(0, 9) == 0) ? saf_e'($urandom_range(1, 2)) : SAF_NONE;
      end
    for (int c = 0; c < C; c++) begin
      @(negedge clk);
      col_we = '0; col_we[c] = 1'b1;
      for (int r = 0; r < R; r++) begin wdata[r] = 2'($urandom); written[r][c] = wdata[r]; end
    end
    @(negedge clk); col_we = '0;
    for (int t = 0; t < 50; t++) begin
      for (int r = 0; r < R; r++) wl[r] = (t == 0) ? 1'b1 : 1'($urandom);
      #1;
      for (int c = 0; c < C; c++) begin
        e1 = 0; e2 = 0;
        for (int r = 0; r < R; r++) begin
          e1 += int'(wl[r] & eff(written[r][c][1], saf[r][c].m1));
          e2 += int'(wl[r] & eff(written[r][c][0], saf[r][c].m2));
        end
        checks++;
        if (int'(lvl_bl1[c]) != e1 || int'(lvl_bl2[c]) != e2) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d c=%0d got %0d/%0d exp %0d/%0d", t, c, lvl_bl1[c], lvl_bl2[c], e1, e2);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
