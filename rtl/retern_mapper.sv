// retern_mapper: the ReTern weight mapping for one array column.
//
// Given the ideal ternary weights of a column and the diagnosed stuck-at
// faults of its cells, it decides how the column is stored:
//
//  1. FAST (fault-aware sign transformation). The column can be stored as
//     W (standard) or as -W (flipped; the macro then negates the column's
//     output). For each option the value every cell would read back is
//     worked out from the faults (W_hardware), and the errors
//       err_standard = sum |w_hw - w_ideal|
//       err_flipped  = sum |w_hw_flipped + w_ideal|
//     are compared; the flipped form is chosen only if its error is
//     strictly smaller. Sums run over all rows; zero weights add the same
//     amount to both.
//  2. Zero-fix. A zero weight is normally stored as 0_0 ({M1,M2} = 00). If
//     a fault makes that read as non-zero, the cell is stored as 0_1 (11)
//     instead: a single stuck-at-1 is then masked, because both elements
//     are on and their bitline discharges cancel.
//
// This follows the paper's algorithm, including the strict comparison and
// the rule that any zero that reads non-zero is re-stored as 0_1. The paper
// runs the algorithm offline in software before programming; here it is
// combinational logic over one column so the macro can be programmed from
// ideal weights and a fault map. err_std, err_flip and n_zfix are reported
// for observation.
module retern_mapper
  import tcim_pkg::*;
#(
  parameter int unsigned ROWS = tcim_pkg::DEF_ROWS,
  localparam int unsigned EW  = $clog2(2 * ROWS + 1),
  localparam int unsigned ZW  = $clog2(ROWS + 1)
) (
  input  tern_t         w_ideal [ROWS],
  input  cell_saf_t     diag    [ROWS],
  output cell_e         cells   [ROWS],
  output logic          col_flip,
  output logic [EW-1:0] err_std,
  output logic [EW-1:0] err_flip,
  output logic [ZW-1:0] n_zfix
);

  // |a - b| for ternary a, b (0, 1 or 2).
  function automatic logic [1:0] tern_dist(input tern_t a, input tern_t b);
    logic signed [2:0] d;
    d = 3'(a) - 3'(b);
    return (d < 0) ? 2'(-d) : 2'(d);
  endfunction

  // Value a cell reads back when state c is written into it.
  function automatic tern_t read_back(input cell_e c, input cell_saf_t f);
    logic [1:0] m;
    m[1] = apply_saf(c[1], f.m1);
    m[0] = apply_saf(c[0], f.m2);
    return cell_value(m);
  endfunction

  tern_t hw_std  [ROWS];
  tern_t hw_flip [ROWS];

  always_comb begin
    err_std  = '0;
    err_flip = '0;
    for (int r = 0; r < ROWS; r++) begin
      hw_std[r]  = read_back(encode_tern(w_ideal[r]), diag[r]);
      hw_flip[r] = read_back(encode_tern(-w_ideal[r]), diag[r]);
      err_std    = err_std  + EW'(tern_dist(hw_std[r], w_ideal[r]));
      err_flip   = err_flip + EW'(tern_dist(hw_flip[r], -w_ideal[r]));
    end
    col_flip = (err_flip < err_std);
  end

  always_comb begin
    n_zfix = '0;
    for (int r = 0; r < ROWS; r++) begin
      if (w_ideal[r] == 2'sd0) begin
        if (hw_std[r] != 2'sd0) begin
          cells[r] = CELL_Z1;
          n_zfix   = n_zfix + 1'b1;
        end else begin
          cells[r] = CELL_Z0;
        end
      end else begin
        cells[r] = encode_tern(col_flip ? -w_ideal[r] : w_ideal[r]);
      end
    end
  end

endmodule
