// wordline_driver: activation latch and bit-serial wordline drive.
//
// The 8-bit activations are not applied as analog levels: they are streamed
// one bit per read onto the wordlines (input encoding of the paper: I = 0
// leaves WL low, I = 1 raises it). To keep bitline non-idealities and the
// ADC range small, only PWA_ROWS of the ROWS wordlines are raised at a time
// (partial wordline activation); the paper uses 16 of 64. This driver latches
// the activation vector when act_load is high and, while rd_en is high,
// drives WL_i = bit bit_sel of activation i for the rows of group grp_sel
// (rows grp_sel*PWA_ROWS .. grp_sel*PWA_ROWS+PWA_ROWS-1) and 0 elsewhere.
// For programming (wr_all) it raises every wordline so a whole column can be
// written. Contiguous row groups are this design's choice.
//
// Timing: the latch updates on the clock edge; wl is combinational from the
// latch and the select inputs. The latch resets to zero.
module wordline_driver
  import tcim_pkg::*;
#(
  parameter int unsigned ROWS     = tcim_pkg::DEF_ROWS,
  parameter int unsigned ACT_BITS = tcim_pkg::DEF_ACT_BITS,
  parameter int unsigned PWA_ROWS = tcim_pkg::DEF_PWA_ROWS,
  localparam int unsigned NGRP    = ROWS / PWA_ROWS,
  localparam int unsigned BW      = (ACT_BITS > 1) ? $clog2(ACT_BITS) : 1,
  localparam int unsigned GW      = (NGRP > 1) ? $clog2(NGRP) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        act_load,
  input  logic [ROWS-1:0][ACT_BITS-1:0] act_in,
  input  logic                        rd_en,
  input  logic [BW-1:0]               bit_sel,
  input  logic [GW-1:0]               grp_sel,
  input  logic                        wr_all,
  output logic [ROWS-1:0]             wl
);

  logic [ROWS-1:0][ACT_BITS-1:0] act_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        act_q <= '0;
    else if (act_load) act_q <= act_in;
  end

  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      if (wr_all)
        wl[r] = 1'b1;
      else
        wl[r] = rd_en && (r / PWA_ROWS == int'(grp_sel)) && act_q[r][bit_sel];
    end
  end

endmodule
