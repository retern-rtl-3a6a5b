// shift_accumulator: bit-significance accumulation of the column outputs.
//
// Activations are streamed one bit per read, and each read covers only one
// group of rows, so a column's dot product is the sum over activation bits b
// and row groups g of psum(b,g) * 2^b. For 2's-complement (signed)
// activations the most significant bit carries weight -2^(ACT_BITS-1), so
// its partial sums are subtracted. The paper states that the outputs are
// accumulated by bit significance and that signed inputs are streamed in
// 2's complement; the accumulator structure is this design's.
//
// Each of the NSETS peripheral sets delivers one partial sum per cycle for
// column set*COLS_PER_SET + col_sel. clr zeroes all accumulators (start of a
// multiply); acc_en adds the current partial sums. Registers update on the
// clock edge; async active-low reset clears them.
module shift_accumulator
  import tcim_pkg::*;
#(
  parameter int unsigned COLS         = tcim_pkg::DEF_COLS,
  parameter int unsigned COLS_PER_SET = tcim_pkg::DEF_COLS_PER_SET,
  parameter int unsigned ACT_BITS     = tcim_pkg::DEF_ACT_BITS,
  parameter int unsigned ADC_BITS     = tcim_pkg::DEF_ADC_BITS,
  parameter int unsigned OUT_W        = tcim_pkg::DEF_OUT_W,
  parameter bit          ACT_SIGNED   = 1'b1,
  localparam int unsigned NSETS       = COLS / COLS_PER_SET,
  localparam int unsigned SW          = (COLS_PER_SET > 1) ? $clog2(COLS_PER_SET) : 1,
  localparam int unsigned BW          = (ACT_BITS > 1) ? $clog2(ACT_BITS) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clr,
  input  logic                     acc_en,
  input  logic [BW-1:0]            bit_idx,
  input  logic [SW-1:0]            col_sel,
  input  logic signed [ADC_BITS:0] psum   [NSETS],
  output logic signed [OUT_W-1:0]  result [COLS]
);

  logic signed [OUT_W-1:0] term [NSETS];
  logic                    neg;

  assign neg = ACT_SIGNED && (int'(bit_idx) == ACT_BITS - 1);

  always_comb begin
    for (int s = 0; s < NSETS; s++)
      term[s] = OUT_W'(psum[s]) <<< bit_idx;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < COLS; c++) result[c] <= '0;
    end else if (clr) begin
      for (int c = 0; c < COLS; c++) result[c] <= '0;
    end else if (acc_en) begin
      for (int s = 0; s < NSETS; s++) begin
        if (neg) result[s*COLS_PER_SET + int'(col_sel)] <= result[s*COLS_PER_SET + int'(col_sel)] - term[s];
        else     result[s*COLS_PER_SET + int'(col_sel)] <= result[s*COLS_PER_SET + int'(col_sel)] + term[s];
      end
    end
  end

endmodule
