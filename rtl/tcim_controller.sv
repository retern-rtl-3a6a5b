// tcim_controller: sequencer of one matrix-vector multiply (MVM).
//
// An MVM needs a read for every combination of activation bit (ACT_BITS),
// row group (NGRP = ROWS / PWA_ROWS) and column within a shared peripheral
// set (COLS_PER_SET), because bits are streamed, only one row group is
// active per read and each ADC set converts one of its columns at a time.
// The controller walks bit (outer), group, then column (inner), one
// conversion per cycle: 8 x 4 x 8 = 256 cycles at the paper's sizes. The
// loop order and one-conversion-per-cycle rate are this design's choices;
// the paper gives no cycle count.
//
// The ADC output is registered, so the accumulate controls (acc_en,
// acc_bit, acc_col) are the read controls delayed by one cycle. clr pulses
// with start to zero the accumulators. done pulses for one cycle once the
// last partial sum has been added, i.e. results are final in the cycle
// done is high. start is ignored while busy. Async active-low reset.
module tcim_controller #(
  parameter int unsigned ACT_BITS     = tcim_pkg::DEF_ACT_BITS,
  parameter int unsigned NGRP         = tcim_pkg::DEF_ROWS / tcim_pkg::DEF_PWA_ROWS,
  parameter int unsigned COLS_PER_SET = tcim_pkg::DEF_COLS_PER_SET,
  localparam int unsigned BW          = (ACT_BITS > 1) ? $clog2(ACT_BITS) : 1,
  localparam int unsigned GW          = (NGRP > 1) ? $clog2(NGRP) : 1,
  localparam int unsigned SW          = (COLS_PER_SET > 1) ? $clog2(COLS_PER_SET) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic          clr,
  // read side
  output logic          rd_en,
  output logic [BW-1:0] bit_sel,
  output logic [GW-1:0] grp_sel,
  output logic [SW-1:0] col_sel,
  // accumulate side (one cycle later)
  output logic          acc_en,
  output logic [BW-1:0] acc_bit,
  output logic [SW-1:0] acc_col
);

  typedef enum logic [1:0] { S_IDLE, S_READ, S_DRAIN, S_DONE } state_e;
  state_e state;

  logic last;
  assign last = (int'(bit_sel) == ACT_BITS - 1) && (int'(grp_sel) == NGRP - 1) &&
                (int'(col_sel) == COLS_PER_SET - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      bit_sel <= '0;
      grp_sel <= '0;
      col_sel <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state   <= S_READ;
          bit_sel <= '0;
          grp_sel <= '0;
          col_sel <= '0;
        end
        S_READ: begin
          if (last) state <= S_DRAIN;
          if (int'(col_sel) == COLS_PER_SET - 1) begin
            col_sel <= '0;
            if (int'(grp_sel) == NGRP - 1) begin
              grp_sel <= '0;
              if (int'(bit_sel) != ACT_BITS - 1) bit_sel <= bit_sel + 1'b1;
            end else begin
              grp_sel <= grp_sel + 1'b1;
            end
          end else begin
            col_sel <= col_sel + 1'b1;
          end
        end
        S_DRAIN: state <= S_DONE;   // last partial sum is being added
        S_DONE:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign rd_en = (state == S_READ);
  assign busy  = (state != S_IDLE);
  assign done  = (state == S_DONE);
  assign clr   = (state == S_IDLE) && start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_en  <= 1'b0;
      acc_bit <= '0;
      acc_col <= '0;
    end else begin
      acc_en  <= rd_en;
      acc_bit <= bit_sel;
      acc_col <= col_sel;
    end
  end

endmodule
