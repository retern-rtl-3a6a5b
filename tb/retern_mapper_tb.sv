// retern_mapper_tb: checks the ReTern column mapping.
//  - The six-row worked example of fault-aware sign transformation
//    (faults M2:SA1, -, M1:SA0, M2:SA1, M2:SA0, -; weights -1,0,+1,+1,-1,0):
//    err_standard = 3, err_flipped = 1, so the column is stored negated.
//  - A zero-fix example: zero weights over a stuck-at-1 in M1 or M2 must be
//    stored as 0_1 (11), zeros over a stuck-at-0 stay 0_0.
//  - Random 64-row columns (37 % zeros, 10 % faulty elements) against a
//    reference written here from the algorithm's definition.
module retern_mapper_tb;
  import tcim_pkg::*;
  localparam int R = 64;

  // small instance for the worked examples
  tern_t     w6 [6];
  cell_saf_t d6 [6];
  cell_e     c6 [6];
  logic      f6;
  logic [3:0] es6, ef6;
  logic [2:0] nz6;
  retern_mapper #(.ROWS(6)) dut6 (.w_ideal(w6), .diag(d6), .cells(c6), .col_flip(f6),
                                  .err_std(es6), .err_flip(ef6), .n_zfix(nz6));

  // full-size instance
  tern_t     w [R];
  cell_saf_t d [R];
  cell_e     c [R];
  logic      f;
  logic [7:0] es, ef;
  logic [6:0] nz;
  retern_mapper #(.ROWS(R)) dut (.w_ideal(w), .diag(d), .cells(c), .col_flip(f),
                                 .err_std(es), .err_flip(ef), .n_zfix(nz));

  int checks = 0, failures = 0, n_flipped = 0, n_zfixed = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Element value read back: stuck value if faulty, else the written bit.
  function automatic int rd(int written, saf_e fl);
    if (fl == SAF_SA0) return 0;
    if (fl == SAF_SA1) return 1;
    return written;
  endfunction
  // Weight the pair (m1,m2) stands for when weight v is written in standard form.
  function automatic int hw(int v, cell_saf_t fl);
    int m1, m2;
    m1 = (v == 1) ? 1 : 0;
    m2 = (v == -1) ? 1 : 0;
    return rd(m1, fl.m1) - rd(m2, fl.m2);
  endfunction
  function automatic int iabs(int x); return x < 0 ? -x : x; endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e_s, e_f, nzx, ex_flip, v;
    cell_e ex;
    // worked FAST example
    w6 = '{-2'sd1, 2'sd0, 2'sd1, 2'sd1, -2'sd1, 2'sd0};
    d6 = '{'{SAF_NONE, SAF_SA1}, '{SAF_NONE, SAF_NONE}, '{SAF_SA0, SAF_NONE},
           '{SAF_NONE, SAF_SA1}, '{SAF_NONE, SAF_SA0}, '{SAF_NONE, SAF_NONE}};
    #1;
    chk(es6 == 4'd3, "example err_standard");
    chk(ef6 == 4'd1, "example err_flipped");
    chk(f6 == 1'b1, "example flip");
    chk(c6[0] == CELL_POS && c6[1] == CELL_Z0 && c6[2] == CELL_NEG &&
        c6[3] == CELL_NEG && c6[4] == CELL_POS && c6[5] == CELL_Z0, "example cells");
    chk(nz6 == 3'd0, "example n_zfix");
    // zero-fix example
    w6 = '{2'sd0, 2'sd0, 2'sd0, 2'sd0, 2'sd1, 2'sd0};
    d6 = '{'{SAF_SA1, SAF_NONE}, '{SAF_NONE, SAF_SA1}, '{SAF_SA0, SAF_NONE},
           '{SAF_NONE, SAF_SA0}, '{SAF_NONE, SAF_NONE}, '{SAF_NONE, SAF_NONE}};
    #1;
    chk(c6[0] == CELL_Z1 && c6[1] == CELL_Z1 && c6[2] == CELL_Z0 && c6[3] == CELL_Z0, "zero-fix cells");
    chk(nz6 == 3'd2, "zero-fix count");
    chk(f6 == 1'b0 && es6 == 4'd2 && ef6 == 4'd2, "zero-fix leaves FAST tie at standard");

    // random columns
    for (int t = 0; t < 2000; t++) begin
      for (int r = 0; r < R; r++) begin
        v = ($urandom_range(0, 99) < 37) ? 0 : (($urandom_range(0, 1) == 0) ? 1 : -1);
        w[r] = tern_t'(v);
        d[r].m1 = ($urandom_range(0, 9) == 0) ? saf_e'($urandom_range(1, 2)) : SAF_NONE;
        d[r].m2 = ($urandom_range(0, 9) == 0) ? saf_e'($urandom_range(1, 2)) : SAF_NONE;
      end
      #1;
      e_s = 0; e_f = 0; nzx = 0;
      for (int r = 0; r < R; r++) begin
        e_s += iabs(hw(int'(w[r]), d[r]) - int'(w[r]));
        e_f += iabs(hw(-int'(w[r]), d[r]) + int'(w[r]));
      end
      ex_flip = (e_f < e_s) ? 1 : 0;
      chk(int'(es) == e_s && int'(ef) == e_f && int'(f) == ex_flip, $sformatf("random %0d errors", t));
      for (int r = 0; r < R; r++) begin
        v = ex_flip ? -int'(w[r]) : int'(w[r]);
        if (v == 1) ex = CELL_POS;
        else if (v == -1) ex = CELL_NEG;
        else if (hw(0, d[r]) != 0) begin ex = CELL_Z1; nzx++; end
        else ex = CELL_Z0;
        chk(c[r] == ex, $sformatf("random %0d row %0d cell", t, r));
      end
      chk(int'(nz) == nzx, "random n_zfix");
      n_flipped += ex_flip; n_zfixed += nzx;
    end
    $display("columns flipped: %0d of 2000, zeros re-stored as 0_1: %0d", n_flipped, n_zfixed);
    chk(n_flipped > 0 && n_zfixed > 0, "both mechanisms exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
