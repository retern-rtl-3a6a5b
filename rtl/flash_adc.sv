// flash_adc: behavioural model of the 4-bit flash ADC on one read bitline.
//
// The input is the bitline voltage drop expressed in units of Delta, the
// drop one conducting cell causes (an integer standing in for the analog
// level). A bank of 2^ADC_BITS - 1 comparators compares it with reference
// levels 1, 2, ..., 2^ADC_BITS - 1 Delta, giving a thermometer code that is
// encoded to binary by counting its ones. A drop beyond the top reference
// therefore reads as full scale (15 for 4 bits): with 16 rows active a
// bitline can fall by 16 Delta, one more than a 4-bit ADC resolves.
// The paper gives the ADC type and resolution; the reference levels and the
// one-cycle registered conversion are this design's choice.
//
// Timing: level is sampled on the clock edge when en is high; code holds the
// result from the next cycle on. Async active-low reset clears code.
module flash_adc #(
  parameter int unsigned ADC_BITS = tcim_pkg::DEF_ADC_BITS,
  parameter int unsigned IN_W     = 7,
  localparam int unsigned NCMP    = (1 << ADC_BITS) - 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  input  logic [IN_W-1:0]     level,
  output logic [ADC_BITS-1:0] code
);

  logic [NCMP-1:0]     therm;
  logic [ADC_BITS-1:0] bin;

  // Comparator bank.
  always_comb begin
    for (int k = 0; k < NCMP; k++)
      therm[k] = (32'(level) >= 32'(k + 1));
  end

  // Thermometer-to-binary encoder.
  always_comb begin
    bin = '0;
    for (int k = 0; k < NCMP; k++)
      bin = bin + ADC_BITS'(therm[k]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  code <= '0;
    else if (en) code <= bin;
  end

endmodule
