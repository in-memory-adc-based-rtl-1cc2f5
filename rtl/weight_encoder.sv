// weight_encoder: spreads one signed multi-bit weight over ternary cells.
//
// A weight of w_bits bits (2, 3 or 4: a sign and 1-3 magnitude bits) is stored
// as K = 2^(w_bits-1) - 1 parallel dual-9T cells that all see the same input.
// Magnitude bit 0 maps to one cell, bit 1 to two cells, bit 2 to four cells, so
// the number of cells that conduct equals |w|. Every conducting cell holds the
// sign of w (+1 or -1); the others hold 0. A 4-bit weight thus uses the 1+2+4 =
// 7 cells of the design's example. The sign is carried by which bit line the
// cell discharges, so no extra cell is spent on it.
//
// Interface: purely combinational. w is two's complement; its magnitude
// saturates at 2^(w_bits-1) - 1 (so -8 in 4-bit becomes -7). cells[j] is the
// content of cell j of the group, j = 0 .. 6; cells at or past K are zero.
//
// Follows the design: binary groups of 1, 2 and 4 identical cells, sign from
// the differential cell. Own choices: the order of the cells in the group and
// the saturation of the most negative code.
module weight_encoder
  import nladc_pkg::*;
(
  input  logic signed [MAX_W_BITS-1:0] w,
  input  logic [2:0]                   w_bits,
  output cell_t                        cells [MAX_CELLS_PER_W]
);

  logic [MAX_W_BITS-1:0] mag_raw;
  logic [2:0]            mag, lim;
  cell_t                 sgn;

  always_comb begin
    case (w_bits)
      3'd3:    lim = 3'd3;
      3'd4:    lim = 3'd7;
      default: lim = 3'd1;
    endcase
    mag_raw = (w < 0) ? MAX_W_BITS'(-w) : MAX_W_BITS'(w);
    mag     = (mag_raw > {1'b0, lim}) ? lim : mag_raw[2:0];
    sgn     = (w < 0) ? CELL_NEG : CELL_POS;
    for (int j = 0; j < MAX_CELLS_PER_W; j++) begin
      logic on;
      if (j == 0)     on = mag[0];
      else if (j < 3) on = mag[1];
      else            on = mag[2];
      cells[j] = on ? sgn : CELL_ZERO;
    end
  end

endmodule
