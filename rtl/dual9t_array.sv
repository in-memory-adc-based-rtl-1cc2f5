// dual9t_array: behavioural model of the 256 x 128 dual-9T SRAM MAC array,
// with its bit-line precharge, the S1 switches and the bit-line capacitors.
// It is a behavioural model of analog circuitry, not synthesizable logic for
// the array itself.
//
// Each cell stores a ternary weight in a 6T SRAM (cell_t). Its decoupled read
// path multiplies that weight by a ternary input: RWL+ applies +1, RWL- applies
// -1, and a zero weight opens no discharge path. The column result is the
// difference of the two read bit lines, V_MAC = V_RBLR - V_RBLL, which
// integrates sum_k W_k * X_k over the PWM input pulses. Here one "unit" of
// voltage is one cell discharging for one clock cycle; the model is linear
// and ignores bit-line saturation, mismatch and noise.
//
// Timing: pch clears both the bit-line difference and the capacitor voltage.
// In every other cycle the product of each active word line is added to the
// bit-line value. While s1 is high the capacitor C_BL follows the bit line
// (v_mac shows the value including this cycle's pulses one cycle later);
// while s1 is low C_BL holds, so word-line activity in the ADC phase does not
// disturb the stored V_MAC. Weights are written one physical row per cycle
// through wr_en/wr_row/wr_data; the array has no reset, like an SRAM.
//
// Follows the design: ternary cell, RWL+/RWL- inputs, V_MAC as bit-line
// difference, S1 hold on C_BL, precharge before the MAC phase. Own choice:
// integer voltage units and the row-wide write port.
module dual9t_array
  import nladc_pkg::*;
#(
  parameter int NROWS = ROWS,
  parameter int NCOLS = COLS
) (
  input  logic                   clk,
  input  logic                   wr_en,
  input  logic [$clog2(NROWS)-1:0] wr_row,
  input  cell_t                  wr_data [NCOLS],
  input  logic [NROWS-1:0]       rwl_p,
  input  logic [NROWS-1:0]       rwl_n,
  input  logic                   pch,
  input  logic                   s1,
  output logic signed [VW-1:0]   v_mac [NCOLS]
);

  // Per column, the V_L and V_R bits of all cells: V_L = 1 is a +1 weight,
  // V_R = 1 a -1 weight.
  logic [NROWS-1:0]     vl  [NCOLS];
  logic [NROWS-1:0]     vr  [NCOLS];
  logic signed [VW-1:0] rbl [NCOLS];

  function automatic logic [VW-1:0] ones(logic [NROWS-1:0] v);
    logic [VW-1:0] n;
    n = '0;
    for (int r = 0; r < NROWS; r++) n = n + VW'(v[r]);
    return n;
  endfunction

  for (genvar c = 0; c < NCOLS; c++) begin : g_col
    logic signed [VW-1:0] acc;

    always_ff @(posedge clk) begin
      if (wr_en) begin
        vl[c][wr_row] <= wr_data[c][1];
        vr[c][wr_row] <= wr_data[c][0];
      end
    end

    // Cells that add: +1 weight on RWL+, -1 weight on RWL-; cells that
    // subtract: -1 weight on RWL+, +1 weight on RWL-.
    assign acc = rbl[c] + $signed(ones(rwl_p & vl[c])) + $signed(ones(rwl_n & vr[c]))
                        - $signed(ones(rwl_p & vr[c])) - $signed(ones(rwl_n & vl[c]));

    always_ff @(posedge clk) begin
      if (pch) begin
        rbl[c]   <= '0;
        v_mac[c] <= '0;
      end else begin
        rbl[c] <= acc;
        if (s1) v_mac[c] <= acc;
      end
    end
  end

endmodule
