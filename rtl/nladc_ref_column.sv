// nladc_ref_column: behavioural model of the in-memory NL-ADC reference column
// (256 replica dual-9T cells, its precharge, its bit-line capacitors and the
// voltage buffer that shares V_ADC with all sense amplifiers). It is a
// behavioural model of analog circuitry; the voltage buffer is taken as ideal.
//
// The replica cells are identical to the MAC cells. Rows 0..3 are the
// calibration cells; the cells below them normally hold +1. Pulsing RWL- on
// +1 cells drives V_ADC negative (the initial ramp, V_initcalib); pulsing
// RWL+ on a group of +1 cells raises V_ADC by one step whose size is the
// number of cells times the pulse length. Calibration cells programmed to -1
// and pulsed with RWL- shift V_initcalib up by one unit each, which is how the
// zero crossing of the ramp is trimmed.
//
// Timing: pch_adc clears V_ADC. In every other cycle the product of each active
// word line is added; v_adc shows it the next cycle (the column has no S1
// switch). Weights are written one cell per cycle through wr_en/wr_row/wr_cell.
//
// Follows the design: one replica column, four calibration cells, initial ramp
// through RWL-, steps through RWL+. Own choices: integer units, ideal buffer.
module nladc_ref_column
  import nladc_pkg::*;
#(
  parameter int NROWS = ROWS
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(NROWS)-1:0] wr_row,
  input  cell_t                    wr_cell,
  input  logic [NROWS-1:0]         rwl_p,
  input  logic [NROWS-1:0]         rwl_n,
  input  logic                     pch_adc,
  output logic signed [VW-1:0]     v_adc
);

  // V_L and V_R bits of the cells: V_L = 1 is +1, V_R = 1 is -1.
  logic [NROWS-1:0] vl, vr;

  function automatic logic [VW-1:0] ones(logic [NROWS-1:0] v);
    logic [VW-1:0] n;
    n = '0;
    for (int r = 0; r < NROWS; r++) n = n + VW'(v[r]);
    return n;
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en) begin
      vl[wr_row] <= wr_cell[1];
      vr[wr_row] <= wr_cell[0];
    end
  end

  logic signed [VW-1:0] acc;
  assign acc = v_adc + $signed(ones(rwl_p & vl)) + $signed(ones(rwl_n & vr))
                     - $signed(ones(rwl_p & vr)) - $signed(ones(rwl_n & vl));

  always_ff @(posedge clk) begin
    if (pch_adc) v_adc <= '0;
    else         v_adc <= acc;
  end

endmodule
