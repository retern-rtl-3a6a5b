// col_flip_reg: near-memory register of the col_flip vector.
//
// ReTern's sign transformation decides per column whether the weights are
// stored as they are or negated; col_flip[i] = 1 marks column i as negated.
// The register holds one bit per column (m bits for m columns, as in the
// paper) and is written one bit at a time as each column is mapped. The
// bit-wise write port and the reset to all zeros (every column standard)
// are this design's choice.
//
// Timing: written on the clock edge when we is high; async active-low reset.
module col_flip_reg #(
  parameter int unsigned COLS = tcim_pkg::DEF_COLS,
  localparam int unsigned CW  = $clog2(COLS)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            we,
  input  logic [CW-1:0]   waddr,
  input  logic            wbit,
  output logic [COLS-1:0] col_flip
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  col_flip <= '0;
    else if (we) col_flip[waddr] <= wbit;
  end

endmodule
