// post_proc: ReTern post-processing of one column (paper Fig. 5(b)).
//
// A plain TCiM column subtracts the BL2 ADC output from the BL1 ADC output
// (x - y). Under ReTern a column may have been stored with all its weights
// negated (a "flipped" column, col_flip = 1); its result must then be
// negated too. Two 2:1 multiplexers in front of the subtractor swap its
// operands: a = out_p, b = out_n for col_flip = 0 and a = out_n, b = out_p
// for col_flip = 1, and the subtractor gives out = a - b. This structure
// is the paper's.
//
// Purely combinational; out is signed and one bit wider than the codes.
module post_proc #(
  parameter int unsigned ADC_BITS = tcim_pkg::DEF_ADC_BITS
) (
  input  logic [ADC_BITS-1:0]        out_p,
  input  logic [ADC_BITS-1:0]        out_n,
  input  logic                       col_flip,
  output logic signed [ADC_BITS:0]   out
);

  logic [ADC_BITS-1:0] a, b;

  assign a   = col_flip ? out_n : out_p;   // upper 2:1 mux
  assign b   = col_flip ? out_p : out_n;   // lower 2:1 mux
  assign out = $signed({1'b0, a}) - $signed({1'b0, b});

endmodule
