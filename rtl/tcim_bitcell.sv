// tcim_bitcell: behavioural model of one ternary compute-in-memory bitcell.
//
// Two binary memory elements M1 and M2 (8T-SRAM, 1T-1ReRAM or FeFET in the
// physical macro) hang off read bitlines BL1 and BL2 through access devices
// gated by one wordline WL. With WL high, an element in state 1 discharges
// its bitline by one unit Delta; a discharge on BL1 means a product of +1,
// on BL2 a product of -1, and equal discharges on both cancel. So the cell
// contributes I*W with W = M1 - M2 (paper's Fig. 1 encoding, {M1,M2}:
// 00 = 0, 10 = +1, 01 = -1, 11 = the redundant second zero).
//
// The storage element is process-specific and is modelled here as a
// flip-flop; a stuck-at fault input (saf) overrides what an element reads
// back, standing in for a manufacturing defect. The fault model (stuck at 0
// or 1, per element) is the paper's; the port-level form is this model's.
//
// Interface: wd is written on the rising clk edge when we is high (the cell
// then holds the new value from the next cycle). dis1/dis2 are combinational
// from wl and the stored value. There is no reset: a cell holds whatever it
// was last programmed with.
module tcim_bitcell
  import tcim_pkg::*;
(
  input  logic      clk,
  input  logic      we,
  input  logic [1:0] wd,      // {M1, M2} to program
  input  cell_saf_t saf,      // physical defects of M1 and M2
  input  logic      wl,       // read wordline
  output logic      dis1,     // discharge on BL1
  output logic      dis2,     // discharge on BL2
  output logic [1:0] m_eff    // {M1, M2} as the cell reads back
);

  logic [1:0] stored;

  always_ff @(posedge clk) begin
    if (we) stored <= wd;
  end

  assign m_eff[1] = apply_saf(stored[1], saf.m1);
  assign m_eff[0] = apply_saf(stored[0], saf.m2);
  assign dis1     = wl & m_eff[1];
  assign dis2     = wl & m_eff[0];

endmodule
