// tcim_array: behavioural model of the ROWS x COLS ternary CiM array.
//
// Each column is a pair of read bitlines (BL1, BL2) shared by ROWS bitcells;
// each row has one wordline. During a read the bitlines are precharged and
// every cell whose wordline is high discharges BL1 (BL2) by one unit if its
// M1 (M2) element is 1. The total drop on BL1 is x = sum(I_i * M1_i) and on
// BL2 y = sum(I_i * M2_i), so x - y is the dot product of the wordline
// vector with the column's ternary weights. The analog drop is modelled as
// the integer count of discharging cells (lvl_bl1 / lvl_bl2, in units of
// Delta); digitising it is the job of the flash ADCs.
//
// Programming writes one whole column per clock: col_we (one-hot, from the
// bitline driver) selects the column and wdata holds the {M1,M2} pair for
// every row. Column-at-a-time writing is this design's choice, made so the
// per-column output of the ReTern mapping can be stored in one cycle.
//
// saf is the physical fault map; m_eff exposes what each cell reads back.
// Read outputs are combinational from wl.
module tcim_array
  import tcim_pkg::*;
#(
  parameter int unsigned ROWS = tcim_pkg::DEF_ROWS,
  parameter int unsigned COLS = tcim_pkg::DEF_COLS,
  localparam int unsigned LW  = $clog2(ROWS + 1)
) (
  input  logic                  clk,
  input  logic [ROWS-1:0]       wl,
  input  logic [COLS-1:0]       col_we,
  input  logic [ROWS-1:0][1:0]  wdata,
  input  cell_saf_t             saf     [ROWS][COLS],
  output logic [LW-1:0]         lvl_bl1 [COLS],
  output logic [LW-1:0]         lvl_bl2 [COLS],
  output logic [1:0]            m_eff   [ROWS][COLS]
);

  logic [COLS-1:0] dis1 [ROWS];
  logic [COLS-1:0] dis2 [ROWS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      tcim_bitcell u_cell (
        .clk   (clk),
        .we    (col_we[c]),
        .wd    (wdata[r]),
        .saf   (saf[r][c]),
        .wl    (wl[r]),
        .dis1  (dis1[r][c]),
        .dis2  (dis2[r][c]),
        .m_eff (m_eff[r][c])
      );
    end
  end

  // Bitline: accumulated discharge of each column.
  for (genvar c = 0; c < COLS; c++) begin : g_bl
    always_comb begin
      lvl_bl1[c] = '0;
      lvl_bl2[c] = '0;
      for (int r = 0; r < ROWS; r++) begin
        lvl_bl1[c] = lvl_bl1[c] + LW'(dis1[r][c]);
        lvl_bl2[c] = lvl_bl2[c] + LW'(dis2[r][c]);
      end
    end
  end

endmodule
