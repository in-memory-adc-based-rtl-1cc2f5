// nladc_center_lut: maps each column's NL-ADC code to its quantized center.
//
// The ADC compares against reference levels R_i (midpoints between adjacent
// quantization centers) and outputs the index of the largest reference not
// above the input, a floor operation. This table turns that index back into
// the center C_i, so that the macro as a whole rounds each MAC result to the
// nearest center. With the initial-ramp level taken as the first comparison,
// codes 0 and 1 both stand for the lowest center; the example map of a 4-bit
// converter onto 6-bit data is
//   code: 0/1  2   3  4  5  6  7 8 9 10 11 12 13 14 15
//   data: -16 -10 -6 -4 -3 -2 -1 0 1  2  3  4  6 10 16
//
// Interface: a programmable table of 2^MAXB signed DATA_W-bit entries, written
// through we/waddr/wdata and cleared by reset. All NCOLS read ports are
// combinational: data[c] follows code[c] in the same cycle.
//
// Follows the design: index-to-center mapping, 6-bit data, one table for the
// layer. Own choices: one shared table for all columns, placed at the macro
// output, and the reset value zero.
module nladc_center_lut
  import nladc_pkg::*;
#(
  parameter int NCOLS = COLS,
  parameter int MAXB  = MAX_BITS,
  parameter int DW    = DATA_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 we,
  input  logic [MAXB-1:0]      waddr,
  input  logic signed [DW-1:0] wdata,
  input  logic [MAXB-1:0]      code [NCOLS],
  output logic signed [DW-1:0] data [NCOLS]
);

  logic signed [DW-1:0] table_q [1 << MAXB];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < (1 << MAXB); i++) table_q[i] <= '0;
    end else if (we) begin
      table_q[waddr] <= wdata;
    end
  end

  always_comb begin
    for (int c = 0; c < NCOLS; c++) data[c] = table_q[code[c]];
  end

endmodule
