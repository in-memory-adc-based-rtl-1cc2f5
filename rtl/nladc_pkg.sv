// nladc_pkg: constants and types shared by the SRAM in-memory-computing macro
// with an in-memory nonlinear ADC (NL-ADC).
//
// Sizes follow the macro described for this design: a 256 x 128 array of
// dual-9T bitcells for the multiply-accumulate (MAC) work, one 256-cell replica
// column that generates the ADC ramp, four of whose cells are reserved for
// zero-crossing calibration, and an ADC resolution configurable from 1 to 7
// bits. The cell encoding {V_L, V_R} is the one printed for the bitcell:
// -1 = (L,H), 0 = (L,L), +1 = (H,L).
//
// Own choices: the signed width of the analog stand-in values (VW), the
// two's-complement input width (IN_W) and the width of the register holding a
// cell count or a pulse width.
package nladc_pkg;

  localparam int ROWS      = 256;  // word lines / input dimension
  localparam int COLS      = 128;  // MAC columns, one SA and one RCNT each
  localparam int CAL_CELLS = 4;    // calibration cells at the top of the ADC column
  localparam int MAX_BITS  = 7;    // highest ADC resolution
  localparam int MAX_IN_BITS = 7;  // highest input magnitude resolution
  localparam int MAX_W_BITS  = 4;  // highest weight resolution (sign + 3 magnitude bits)
  localparam int MAX_CELLS_PER_W = (1 << (MAX_W_BITS - 1)) - 1;  // 1+2+4 = 7
  localparam int IN_W      = 8;    // signed input word
  localparam int CNT_W     = MAX_BITS;  // ripple-counter width
  localparam int DATA_W    = 6;    // quantized-center word (6-bit data of the code map)
  localparam int VW        = 20;   // signed width of a modelled bit-line voltage
                                   // (|V| <= 256 cells x 255 cycles < 2^17)
  localparam int CELL_W    = 8;    // width of a cell count (0..255)
  localparam int PW_W      = 8;    // width of a ramp pulse length in clock cycles
  localparam int ROW_W     = $clog2(ROWS);

  // Ternary weight held by the 6T part of a dual-9T cell, as {V_L, V_R}.
  typedef enum logic [1:0] {
    CELL_ZERO = 2'b00,
    CELL_NEG  = 2'b01,
    CELL_POS  = 2'b10
  } cell_t;

  // Signed value of a cell; the unused code 2'b11 counts as zero.
  function automatic int cell_value(cell_t c);
    case (c)
      CELL_POS: return 1;
      CELL_NEG: return -1;
      default:  return 0;
    endcase
  endfunction

endpackage
