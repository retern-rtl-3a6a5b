// bitline_driver: drives the transformed weights into the array.
//
// The paper only names this block (it takes the ReTern-transformed weights
// into the array). This design writes one column per cycle: the driver
// decodes the column address into a one-hot write enable and places the
// {M1,M2} pair of every row's cell state on that column's bitlines. The
// cell-state code is the {M1,M2} pair itself (tcim_pkg::cell_e), so +1 is
// driven as M1=1,M2=0, -1 as 0,1, and the two zero forms as 0,0 and 1,1.
//
// Purely combinational.
module bitline_driver
  import tcim_pkg::*;
#(
  parameter int unsigned ROWS = tcim_pkg::DEF_ROWS,
  parameter int unsigned COLS = tcim_pkg::DEF_COLS,
  localparam int unsigned CW  = $clog2(COLS)
) (
  input  logic                 wr_en,
  input  logic [CW-1:0]        wr_col,
  input  cell_e                cells  [ROWS],
  output logic [COLS-1:0]      col_we,
  output logic [ROWS-1:0][1:0] wdata
);

  always_comb begin
    col_we = '0;
    if (wr_en) col_we[wr_col] = 1'b1;
    for (int r = 0; r < ROWS; r++) begin
      unique case (cells[r])
        CELL_POS: wdata[r] = 2'b10;
        CELL_NEG: wdata[r] = 2'b01;
        CELL_Z1:  wdata[r] = 2'b11;
        default:  wdata[r] = 2'b00;
      endcase
    end
  end

endmodule
