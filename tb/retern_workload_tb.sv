// retern_workload_tb: Monte Carlo fault-injection runs on one 64x64 tile of
// a ternary LLM feed-forward layer.
//
// For each of two stuck-at-fault rates (5 % and 10 % of memory elements,
// half stuck-at-0 and half stuck-at-1, placed uniformly at random) and two
// weight sparsities (37.05 % and 37.55 % zeros, the sparsities reported for
// the 700M and 3B BitNet b1.58 models), TRIALS independent fault maps are
// drawn. For each map a fresh random ternary tile is programmed through the
// ReTern mapping and NACT random signed 8-bit activation vectors are
// multiplied. Every result is checked exactly against a model of the macro,
// and the mean absolute error against the fault-free product is reported
// for the macro (ReTern) and for the same tile stored without any fault
// handling. The run fails if ReTern does not reduce the error at either
// rate. The tile sizes are those of the macro; the weights are random, not
// taken from a trained model.
module retern_workload_tb;
  import tcim_pkg::*;
  localparam int R = 64, C = 64, TRIALS = 10, NACT = 3;

  logic clk = 0, rst_n = 0;
  logic map_valid = 0, start = 0;
  logic [5:0] map_col = '0;
  tern_t map_w [R];
  cell_saf_t map_diag [R];
  logic map_flip;
  logic [7:0] map_err_std, map_err_flip;
  logic [6:0] map_nzfix;
  cell_saf_t saf [R][C];
  logic signed [7:0] act [R];
  logic busy, done;
  logic signed [15:0] result [C];
  logic [1:0] cell_rd [R][C];

  retern_tcim_macro dut (
    .clk, .rst_n, .map_valid, .map_col, .map_w, .map_diag, .map_flip, .map_err_std,
    .map_err_flip, .map_nzfix, .saf, .start, .act, .busy, .done, .result, .cell_rd);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int w_ideal [R][C];
  int flip_ref [C];
  logic [1:0] eff_ref [R][C], eff_base [R][C];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic int rd(int written, saf_e fl);
    if (fl == SAF_SA0) return 0;
    if (fl == SAF_SA1) return 1;
    return written;
  endfunction
  function automatic logic [1:0] store(int v, cell_saf_t fl, bit zero_one);
    int m1, m2;
    m1 = (v == 1 || (v == 0 && zero_one)) ? 1 : 0;
    m2 = (v == -1 || (v == 0 && zero_one)) ? 1 : 0;
    return {1'(rd(m1, fl.m1)), 1'(rd(m2, fl.m2))};
  endfunction
  function automatic int val(logic [1:0] m); return int'(m[1]) - int'(m[0]); endfunction
  function automatic int iabs(int x); return x < 0 ? -x : x; endfunction

  function automatic int model(int c, logic [1:0] eff [R][C], int flip, logic signed [7:0] a [R]);
    int acc, x, y, p;
    acc = 0;
    for (int b = 0; b < 8; b++)
      for (int g = 0; g < 4; g++) begin
        x = 0; y = 0;
        for (int r = g * 16; r < g * 16 + 16; r++)
          if (a[r][b]) begin x += int'(eff[r][c][1]); y += int'(eff[r][c][0]); end
        x = (x > 15) ? 15 : x; y = (y > 15) ? 15 : y;
        p = flip ? (y - x) : (x - y);
        acc += (b == 7) ? -(p <<< b) : (p <<< b);
      end
    return acc;
  endfunction

  initial begin
    #50ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int rate_pct [2] = '{5, 10};
    int sparsity_pm [2] = '{3705, 3755};      // zeros per 10,000
    int e_s, e_f, ideal, got, n;
    longint err_r [2], err_b [2];
    logic signed [7:0] a [R];
    for (int r = 0; r < R; r++) begin map_w[r] = '0; map_diag[r] = '{SAF_NONE, SAF_NONE}; act[r] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int ri = 0; ri < 2; ri++) begin
      err_r[ri] = 0; err_b[ri] = 0; n = 0;
      for (int si = 0; si < 2; si++)
        for (int t = 0; t < TRIALS; t++) begin
          for (int r = 0; r < R; r++)
            for (int c = 0; c < C; c++) begin
              saf[r][c].m1 = ($urandom_range(0, 99) < rate_pct[ri]) ? saf_e'($urandom_range(1, 2)) : SAF_NONE;
              saf[r][c].m2 = ($urandom_range(0, 99) < rate_pct[ri]) ? saf_e'($urandom_range(1, 2)) : SAF_NONE;
              w_ideal[r][c] = ($urandom_range(0, 9999) < sparsity_pm[si]) ? 0 : (($urandom_range(0, 1) == 0) ? 1 : -1);
            end
          for (int c = 0; c < C; c++) begin
            @(negedge clk);
            map_valid = 1; map_col = 6'(c);
            for (int r = 0; r < R; r++) begin map_w[r] = tern_t'(w_ideal[r][c]); map_diag[r] = saf[r][c]; end
            e_s = 0; e_f = 0;
            for (int r = 0; r < R; r++) begin
              e_s += iabs(val(store(w_ideal[r][c], saf[r][c], 0)) - w_ideal[r][c]);
              e_f += iabs(val(store(-w_ideal[r][c], saf[r][c], 0)) + w_ideal[r][c]);
            end
            flip_ref[c] = (e_f < e_s) ? 1 : 0;
            for (int r = 0; r < R; r++) begin
              eff_base[r][c] = store(w_ideal[r][c], saf[r][c], 0);
              if (w_ideal[r][c] == 0)
                eff_ref[r][c] = store(0, saf[r][c], val(store(0, saf[r][c], 0)) != 0);
              else
                eff_ref[r][c] = store(flip_ref[c] ? -w_ideal[r][c] : w_ideal[r][c], saf[r][c], 0);
            end
          end
          @(negedge clk); map_valid = 0;
          for (int k = 0; k < NACT; k++) begin
            for (int r = 0; r < R; r++) begin act[r] = 8'($urandom); a[r] = act[r]; end
            @(negedge clk); start = 1;
            @(negedge clk); start = 0;
            while (!done) @(negedge clk);
            for (int c = 0; c < C; c++) begin
              got = int'(result[c]);
              chk(got == model(c, eff_ref, flip_ref[c], a), $sformatf("rate %0d trial %0d col %0d", rate_pct[ri], t, c));
              ideal = 0;
              for (int r = 0; r < R; r++) ideal += w_ideal[r][c] * int'(a[r]);
              err_r[ri] += iabs(got - ideal);
              err_b[ri] += iabs(model(c, eff_base, 0, a) - ideal);
              n++;
            end
          end
        end
      $display("SAF rate %0d%%: mean |error| per output, without fault handling %0d.%02d, with ReTern %0d.%02d (%0d outputs)",
               rate_pct[ri], err_b[ri] / n, (err_b[ri] * 100 / n) % 100, err_r[ri] / n, (err_r[ri] * 100 / n) % 100, n);
      chk(err_r[ri] < err_b[ri], $sformatf("ReTern reduces the error at %0d%%", rate_pct[ri]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
