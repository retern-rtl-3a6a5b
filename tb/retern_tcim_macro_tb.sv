// retern_tcim_macro_tb: end-to-end test of the full-size (64x64) macro at
// its default parameters.
//
// 1. A random fault map is drawn: each memory element is stuck with
//    probability 10 % (half stuck-at-0, half stuck-at-1). Column 62 is kept
//    fault-free and holds all +1 weights so that a read can overdrive the
//    4-bit ADC.
// 2. Random ternary weights with about 37 % zeros are programmed column by
//    column through the ReTern mapping, with the true fault map as the
//    diagnosis. The testbench works out its own mapping (FAST decision and
//    zero-fix) and checks the macro's decisions and every cell's read-back.
// 3. Several multiplies with random signed 8-bit activations (and one with
//    all activations -1) are run. Each result is compared exactly with a
//    model of the array: per 16-row group and activation bit, BL1/BL2
//    counts clipped to 15, operand swap for flipped columns, 2's-complement
//    bit weights. Each multiply must finish 258 cycles after start.
// 4. A column write and a second start issued during a multiply must be
//    ignored.
// 5. The total error against the fault-free product is reported for the
//    macro and for the same weights stored without ReTern; the ReTern error
//    must be the smaller.
// Every mechanism (column flip, zero-fix, ADC clipping, negative sign-bit
// accumulation, ignored write and start while busy) must occur at least once.
module retern_tcim_macro_tb;
  import tcim_pkg::*;
  localparam int R = 64, C = 64, NMVM = 12;

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
  int n_flip = 0, n_zfix = 0, n_clip = 0, n_negbit = 0, n_ign_wr = 0, n_ign_start = 0;
  int w_ideal [R][C];
  int flip_ref [C];
  logic [1:0] eff_ref [R][C];      // {M1,M2} read back, with ReTern
  logic [1:0] eff_base [R][C];     // {M1,M2} read back, plain mapping
  longint err_retern = 0, err_base = 0;
  logic signed [7:0] act_used [R];

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

  // Macro model: 16-row groups, bit-serial, ADC clip at 15, flip swap.
  function automatic int model(int c, logic [1:0] eff [R][C], int flip, ref int clip_cnt, input bit count);
    int acc, x, y, p;
    acc = 0;
    for (int b = 0; b < 8; b++)
      for (int g = 0; g < 4; g++) begin
        x = 0; y = 0;
        for (int r = g * 16; r < g * 16 + 16; r++)
          if (act_used[r][b]) begin x += int'(eff[r][c][1]); y += int'(eff[r][c][0]); end
        if (count && (x > 15 || y > 15)) clip_cnt++;
        x = (x > 15) ? 15 : x; y = (y > 15) ? 15 : y;
        p = flip ? (y - x) : (x - y);
        acc += (b == 7) ? -(p <<< b) : (p <<< b);
      end
    return acc;
  endfunction

  initial begin
    #20ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e_s, e_f, cyc, ideal, got, exp, dummy;
    // fault map and weights
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        saf[r][c].m1 = ($urandom_range(0, 99) < 10) ? saf_e'($urandom_range(1, 2)) : SAF_NONE;
        saf[r][c].m2 = ($urandom_range(0, 99) < 10) ? saf_e'($urandom_range(1, 2)) : SAF_NONE;
        w_ideal[r][c] = ($urandom_range(0, 99) < 37) ? 0 : (($urandom_range(0, 1) == 0) ? 1 : -1);
        if (c == 62) begin saf[r][c] = '{SAF_NONE, SAF_NONE}; w_ideal[r][c] = 1; end
      end
    for (int r = 0; r < R; r++) begin map_w[r] = '0; map_diag[r] = '{SAF_NONE, SAF_NONE}; act[r] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;

    // programming through the ReTern mapping
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
      n_flip += flip_ref[c];
      for (int r = 0; r < R; r++) begin
        eff_base[r][c] = store(w_ideal[r][c], saf[r][c], 0);
        if (w_ideal[r][c] == 0) begin
          if (val(store(0, saf[r][c], 0)) != 0) begin eff_ref[r][c] = store(0, saf[r][c], 1); n_zfix++; end
          else eff_ref[r][c] = store(0, saf[r][c], 0);
        end else
          eff_ref[r][c] = store(flip_ref[c] ? -w_ideal[r][c] : w_ideal[r][c], saf[r][c], 0);
      end
      #1;
      chk(int'(map_flip) == flip_ref[c] && int'(map_err_std) == e_s && int'(map_err_flip) == e_f,
          $sformatf("map decision col %0d", c));
    end
    @(negedge clk); map_valid = 0;
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++)
        chk(cell_rd[r][c] == eff_ref[r][c], $sformatf("cell read-back r%0d c%0d", r, c));

    // multiplies
    for (int m = 0; m < NMVM; m++) begin
      for (int r = 0; r < R; r++) act[r] = (m == 0) ? -8'sd1 : 8'($urandom);
      act_used = act;
      for (int r = 0; r < R; r++) if (act[r] < 0) n_negbit++;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      for (int r = 0; r < R; r++) act[r] = 8'($urandom);   // latched at start: must not matter
      // while busy: a second start and a column write must both be ignored
      if (m == 1) begin
        start = 1; map_valid = 1; map_col = 6'd5;
        for (int r = 0; r < R; r++) map_w[r] = tern_t'(-w_ideal[r][5]);
        @(negedge clk); cyc++; start = 0; map_valid = 0;
        chk(busy, "still busy after ignored start");
        n_ign_start++; n_ign_wr++;
      end
      while (!done && cyc < 2000) begin @(negedge clk); cyc++; end
      chk(cyc == 258, $sformatf("mvm %0d latency %0d cycles", m, cyc));
      // results are final while done is high
      for (int c = 0; c < C; c++) begin
        exp = model(c, eff_ref, flip_ref[c], n_clip, 1'b1);
        got = int'(result[c]);
        chk(got == exp, $sformatf("mvm %0d col %0d result %0d expected %0d", m, c, got, exp));
        ideal = 0;
        for (int r = 0; r < R; r++) ideal += w_ideal[r][c] * int'(act_used[r]);
        if (c != 62) begin
          err_retern += iabs(got - ideal);
          err_base   += iabs(model(c, eff_base, 0, dummy, 1'b0) - ideal);
        end
      end
      @(negedge clk);
      chk(!busy && !done, "idle after done");
    end
    // the write during the multiply must not have reached column 5
    for (int r = 0; r < R; r++)
      chk(cell_rd[r][5] == eff_ref[r][5], $sformatf("column 5 unchanged r%0d", r));

    $display("total |error| vs fault-free product: with ReTern %0d, without %0d", err_retern, err_base);
    chk(err_retern < err_base, "ReTern reduces the error");
    $display("mechanisms: flips=%0d zero-fixes=%0d adc-clips=%0d negative-activations=%0d ignored-writes=%0d ignored-starts=%0d",
             n_flip, n_zfix, n_clip, n_negbit, n_ign_wr, n_ign_start);
    chk(n_flip > 0, "column flip exercised");
    chk(n_zfix > 0, "zero-fix exercised");
    chk(n_clip > 0, "ADC clipping exercised");
    chk(n_negbit > 0, "negative activations exercised");
    chk(n_ign_wr > 0 && n_ign_start > 0, "busy lock-out exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
