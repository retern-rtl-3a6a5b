// column_periph: one shared set of column peripherals.
//
// To save ADC area, one set of column peripherals serves COLS_PER_SET
// columns (eight in the paper) in turn. A set is an 8:1 column multiplexer
// on the BL1 and BL2 levels (and on the columns' col_flip bits), a flash
// ADC per bitline, and the ReTern post-processing (operand-swapping muxes
// and subtractor). Sharing across eight columns follows the paper; the
// multiplexer position and registering col_flip with the ADC sample, so
// that it stays aligned with the code it applies to, are this design's
// choices.
//
// Timing: levels and col_sel are sampled on the clock edge when en is high;
// psum is the signed partial sum of that sample from the next cycle on.
module column_periph
  import tcim_pkg::*;
#(
  parameter int unsigned COLS_PER_SET = tcim_pkg::DEF_COLS_PER_SET,
  parameter int unsigned ADC_BITS     = tcim_pkg::DEF_ADC_BITS,
  parameter int unsigned IN_W         = 7,
  localparam int unsigned SW          = (COLS_PER_SET > 1) ? $clog2(COLS_PER_SET) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      en,
  input  logic [SW-1:0]             col_sel,
  input  logic [IN_W-1:0]           lvl_bl1 [COLS_PER_SET],
  input  logic [IN_W-1:0]           lvl_bl2 [COLS_PER_SET],
  input  logic [COLS_PER_SET-1:0]   flip,
  output logic signed [ADC_BITS:0]  psum
);

  logic [IN_W-1:0]     sel_bl1, sel_bl2;
  logic [ADC_BITS-1:0] out_p, out_n;
  logic                flip_q;

  // Column multiplexer.
  assign sel_bl1 = lvl_bl1[col_sel];
  assign sel_bl2 = lvl_bl2[col_sel];

  flash_adc #(.ADC_BITS(ADC_BITS), .IN_W(IN_W)) u_adc_p (
    .clk(clk), .rst_n(rst_n), .en(en), .level(sel_bl1), .code(out_p));
  flash_adc #(.ADC_BITS(ADC_BITS), .IN_W(IN_W)) u_adc_n (
    .clk(clk), .rst_n(rst_n), .en(en), .level(sel_bl2), .code(out_n));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  flip_q <= 1'b0;
    else if (en) flip_q <= flip[col_sel];
  end

  post_proc #(.ADC_BITS(ADC_BITS)) u_pp (
    .out_p(out_p), .out_n(out_n), .col_flip(flip_q), .out(psum));

endmodule
