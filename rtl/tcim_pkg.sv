// tcim_pkg: types and constants shared by the ternary compute-in-memory
// (TCiM) macro with ReTern fault tolerance.
//
// A ternary weight W in {-1,0,+1} is held by two binary memory elements M1
// and M2 with W = M1 - M2. The cell state is coded as {M1,M2}: 00 and 11 both
// read as zero (0_0 and 0_1; 11 is the otherwise unused, "naturally
// redundant" state), 10 is +1 and 01 is -1. This encoding and the sizes
// below (64x64 array, 8-bit activations, 16 rows active per read, 4-bit
// flash ADCs, one peripheral set per 8 columns) follow the paper; the output
// width and the fault-type coding are this design's choices.
package tcim_pkg;

  // Array and datapath sizes.
  localparam int unsigned DEF_ROWS         = 64;
  localparam int unsigned DEF_COLS         = 64;
  localparam int unsigned DEF_ACT_BITS     = 8;
  localparam int unsigned DEF_PWA_ROWS     = 16;
  localparam int unsigned DEF_ADC_BITS     = 4;
  localparam int unsigned DEF_COLS_PER_SET = 8;
  localparam int unsigned DEF_OUT_W        = 16;

  // Cell state = {M1, M2}.
  typedef enum logic [1:0] {
    CELL_Z0  = 2'b00,   // zero, both elements off (0_0)
    CELL_NEG = 2'b01,   // -1
    CELL_POS = 2'b10,   // +1
    CELL_Z1  = 2'b11    // zero, both elements on (0_1)
  } cell_e;

  // Stuck-at fault of one binary memory element.
  typedef enum logic [1:0] {
    SAF_NONE = 2'b00,
    SAF_SA0  = 2'b01,   // stuck at 0 (high-resistance state)
    SAF_SA1  = 2'b10    // stuck at 1 (low-resistance state)
  } saf_e;

  // Faults of the two elements of one bitcell.
  typedef struct packed {
    saf_e m1;
    saf_e m2;
  } cell_saf_t;

  // Signed ternary weight, -1, 0 or +1.
  typedef logic signed [1:0] tern_t;

  // Value an element reads back given what was written and its fault.
  function automatic logic apply_saf(input logic written, input saf_e f);
    case (f)
      SAF_SA0: return 1'b0;
      SAF_SA1: return 1'b1;
      default: return written;
    endcase
  endfunction

  // Cell state that codes a ternary weight in its standard form (zero as 0_0).
  function automatic cell_e encode_tern(input tern_t w);
    if (w == 2'sd1)       return CELL_POS;
    else if (w == -2'sd1) return CELL_NEG;
    else                  return CELL_Z0;
  endfunction

  // Ternary value M1 - M2 that a {M1,M2} pair reads as.
  function automatic tern_t cell_value(input logic [1:0] m);
    return tern_t'($signed({1'b0, m[1]}) - $signed({1'b0, m[0]}));
  endfunction

endpackage
