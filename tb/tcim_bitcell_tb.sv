// tcim_bitcell_tb: programs every {M1,M2} state under every fault
// combination and checks read-back and both bitline discharges against the
// rule "an element stuck at v reads v, otherwise what was written; a
// conducting element discharges its bitline only when WL is high".
module tcim_bitcell_tb;
  import tcim_pkg::*;
  logic clk = 0, we, wl, dis1, dis2;
  logic [1:0] wd, m_eff;
  cell_saf_t saf;
  int checks = 0, failures = 0;

  tcim_bitcell dut (.clk, .we, .wd, .saf, .wl, .dis1, .dis2, .m_eff);
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic e1, e2;
    we = 0; wl = 0; wd = 0; saf = '{SAF_NONE, SAF_NONE};
    for (int s = 0; s < 4; s++)
      for (int f1 = 0; f1 < 3; f1++)
        for (int f2 = 0; f2 < 3; f2++) begin
          @(negedge clk); we = 1; wd = 2'(s);
          saf.m1 = saf_e'(f1); saf.m2 = saf_e'(f2);
          @(negedge clk); we = 0; wd = ~wd;      // wd changes must not matter now
          e1 = (f1 == 1) ? 1'b0 : (f1 == 2) ? 1'b1 : s[1];
          e2 = (f2 == 1) ? 1'b0 : (f2 == 2) ? 1'b1 : s[0];
          for (int w = 0; w < 2; w++) begin
            wl = w[0]; #1;
            checks++;
            if (m_eff !== {e1, e2} || dis1 !== (e1 & w[0]) || dis2 !== (e2 & w[0])) begin
              failures++;
              $display("FAIL s=%0d f1=%0d f2=%0d wl=%0d: m_eff=%b dis=%b%b", s, f1, f2, w, m_eff, dis1, dis2);
            end
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
