// retern_tcim_macro: a 64x64 ternary compute-in-memory macro with ReTern
// stuck-at-fault tolerance.
//
// The macro multiplies a vector of ROWS signed 8-bit activations by a
// ROWS x COLS matrix of ternary weights held in two-element bitcells, and
// tolerates stuck-at faults in those elements through two mappings applied
// when the weights are programmed:
//   - zero-fix stores a zero weight as 11 instead of 00 when a fault would
//     make 00 read as non-zero (the 11 state is otherwise unused);
//   - FAST stores a whole column negated when that masks more faults, and
//     records this in col_flip so the column's output is negated back.
//
// Programming path (one column per cycle, map_valid): retern_mapper turns
// the ideal weights map_w and the diagnosed faults map_diag of column map_col
// into cell states and a flip bit; bitline_driver writes the column and
// col_flip_reg stores the bit. map_flip/map_err_std/map_err_flip/map_nzfix
// report the mapper's decision for the column being presented.
//
// Inference path (start): wordline_driver latches act and streams it bit
// by bit onto 16 of the 64 wordlines at a time; tcim_array produces the
// BL1/BL2 discharge levels; NSETS = COLS/8 column_periph sets each convert
// one of their 8 columns per cycle (two flash ADCs, col_flip operand swap,
// subtraction); shift_accumulator weights the partial sums by bit
// significance. tcim_controller sequences 256 reads; done pulses 258 cycles
// after start, with result final in that cycle and held until the next
// start.
//
// saf is the physical fault map of the array, a model input standing in for
// manufacturing defects; fault diagnosis itself is outside this macro and its
// result arrives on map_diag. Structure and sizes follow the paper; the
// column-wide write, the sequencing and the result width are this design's.
// map_valid is ignored while an MVM is running. cell_rd shows what every
// cell reads back, for test. The assertion below samples rst_n as its
// disable condition, which lint reports as a synchronous use of the
// asynchronous reset; it is not part of the circuit.
module retern_tcim_macro
  import tcim_pkg::*;
#(
  parameter int unsigned ROWS         = tcim_pkg::DEF_ROWS,
  parameter int unsigned COLS         = tcim_pkg::DEF_COLS,
  parameter int unsigned ACT_BITS     = tcim_pkg::DEF_ACT_BITS,
  parameter int unsigned PWA_ROWS     = tcim_pkg::DEF_PWA_ROWS,
  parameter int unsigned ADC_BITS     = tcim_pkg::DEF_ADC_BITS,
  parameter int unsigned COLS_PER_SET = tcim_pkg::DEF_COLS_PER_SET,
  parameter int unsigned OUT_W        = tcim_pkg::DEF_OUT_W,
  localparam int unsigned CW          = $clog2(COLS),
  localparam int unsigned EW          = $clog2(2 * ROWS + 1),
  localparam int unsigned ZW          = $clog2(ROWS + 1)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // programming through the ReTern mapping
  input  logic                        map_valid,
  input  logic [CW-1:0]               map_col,
  input  tern_t                       map_w    [ROWS],
  input  cell_saf_t                   map_diag [ROWS],
  output logic                        map_flip,
  output logic [EW-1:0]               map_err_std,
  output logic [EW-1:0]               map_err_flip,
  output logic [ZW-1:0]               map_nzfix,
  // physical defects of the array
  input  cell_saf_t                   saf      [ROWS][COLS],
  // matrix-vector multiply
  input  logic                        start,
  input  logic signed [ACT_BITS-1:0]  act      [ROWS],
  output logic                        busy,
  output logic                        done,
  output logic signed [OUT_W-1:0]     result   [COLS],
  // {M1,M2} each cell reads back (programmed value with faults applied)
  output logic [1:0]                  cell_rd  [ROWS][COLS]
);

  localparam int unsigned NGRP  = ROWS / PWA_ROWS;
  localparam int unsigned NSETS = COLS / COLS_PER_SET;
  localparam int unsigned LW    = $clog2(ROWS + 1);
  localparam int unsigned BW    = (ACT_BITS > 1) ? $clog2(ACT_BITS) : 1;
  localparam int unsigned GW    = (NGRP > 1) ? $clog2(NGRP) : 1;
  localparam int unsigned SW    = (COLS_PER_SET > 1) ? $clog2(COLS_PER_SET) : 1;

  // ---------------- programming path ----------------
  cell_e                 map_cells [ROWS];
  logic                  prog;
  logic [COLS-1:0]       col_we;
  logic [ROWS-1:0][1:0]  wdata;
  logic [COLS-1:0]       col_flip;

  assign prog = map_valid && !busy;

  retern_mapper #(.ROWS(ROWS)) u_mapper (
    .w_ideal (map_w),
    .diag    (map_diag),
    .cells   (map_cells),
    .col_flip(map_flip),
    .err_std (map_err_std),
    .err_flip(map_err_flip),
    .n_zfix  (map_nzfix)
  );

  bitline_driver #(.ROWS(ROWS), .COLS(COLS)) u_bl_drv (
    .wr_en (prog),
    .wr_col(map_col),
    .cells (map_cells),
    .col_we(col_we),
    .wdata (wdata)
  );

  col_flip_reg #(.COLS(COLS)) u_flip (
    .clk     (clk),
    .rst_n   (rst_n),
    .we      (prog),
    .waddr   (map_col),
    .wbit    (map_flip),
    .col_flip(col_flip)
  );

  // ---------------- inference path ----------------
  logic                          ctl_clr, rd_en, acc_en;
  logic [BW-1:0]                 bit_sel, acc_bit;
  logic [GW-1:0]                 grp_sel;
  logic [SW-1:0]                 col_sel, acc_col;
  logic [ROWS-1:0]               wl;
  logic [ROWS-1:0][ACT_BITS-1:0] act_bits;
  logic [LW-1:0]                 lvl_bl1 [COLS];
  logic [LW-1:0]                 lvl_bl2 [COLS];
  logic signed [ADC_BITS:0]      psum    [NSETS];

  tcim_controller #(
    .ACT_BITS(ACT_BITS), .NGRP(NGRP), .COLS_PER_SET(COLS_PER_SET)
  ) u_ctl (
    .clk(clk), .rst_n(rst_n), .start(start), .busy(busy), .done(done), .clr(ctl_clr),
    .rd_en(rd_en), .bit_sel(bit_sel), .grp_sel(grp_sel), .col_sel(col_sel),
    .acc_en(acc_en), .acc_bit(acc_bit), .acc_col(acc_col)
  );

  always_comb begin
    for (int r = 0; r < ROWS; r++) act_bits[r] = act[r];
  end

  wordline_driver #(.ROWS(ROWS), .ACT_BITS(ACT_BITS), .PWA_ROWS(PWA_ROWS)) u_wl_drv (
    .clk     (clk),
    .rst_n   (rst_n),
    .act_load(ctl_clr),
    .act_in  (act_bits),
    .rd_en   (rd_en),
    .bit_sel (bit_sel),
    .grp_sel (grp_sel),
    .wr_all  (prog),
    .wl      (wl)
  );

  tcim_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk    (clk),
    .wl     (wl),
    .col_we (col_we),
    .wdata  (wdata),
    .saf    (saf),
    .lvl_bl1(lvl_bl1),
    .lvl_bl2(lvl_bl2),
    .m_eff  (cell_rd)
  );

  for (genvar s = 0; s < NSETS; s++) begin : g_set
    logic [LW-1:0] set_bl1 [COLS_PER_SET];
    logic [LW-1:0] set_bl2 [COLS_PER_SET];
    always_comb begin
      for (int k = 0; k < COLS_PER_SET; k++) begin
        set_bl1[k] = lvl_bl1[s*COLS_PER_SET + k];
        set_bl2[k] = lvl_bl2[s*COLS_PER_SET + k];
      end
    end
    column_periph #(
      .COLS_PER_SET(COLS_PER_SET), .ADC_BITS(ADC_BITS), .IN_W(LW)
    ) u_periph (
      .clk    (clk),
      .rst_n  (rst_n),
      .en     (rd_en),
      .col_sel(col_sel),
      .lvl_bl1(set_bl1),
      .lvl_bl2(set_bl2),
      .flip   (col_flip[s*COLS_PER_SET +: COLS_PER_SET]),
      .psum   (psum[s])
    );
  end

  shift_accumulator #(
    .COLS(COLS), .COLS_PER_SET(COLS_PER_SET), .ACT_BITS(ACT_BITS),
    .ADC_BITS(ADC_BITS), .OUT_W(OUT_W), .ACT_SIGNED(1'b1)
  ) u_acc (
    .clk    (clk),
    .rst_n  (rst_n),
    .clr    (ctl_clr),
    .acc_en (acc_en),
    .bit_idx(acc_bit),
    .col_sel(acc_col),
    .psum   (psum),
    .result (result)
  );

  // A column write and a read never share a cycle.
  a_no_write_during_read: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && |col_we));

endmodule
