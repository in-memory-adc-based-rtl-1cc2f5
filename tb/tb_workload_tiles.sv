// tb_workload_tiles: runs one full macro tile of three larger networks on the
// full-size macro, each at the precision that network is quantized to, and
// checks that every column output is rounded to the nearest center.
//
// A network larger than the macro is split into tiles of as many logical rows
// as the array holds at the chosen weight width, by 128 columns. This
// testbench loads one such tile with random weights and runs a batch of random
// input vectors through it:
//
//   VGG-16 tile:        3-bit weights (3 cells each), 85 logical rows,
//                       6-bit non-negative inputs, 3-bit NL-ADC (7 refs);
//   Inception-V3 tile:  4-bit weights (7 cells each), 36 logical rows,
//                       6-bit non-negative inputs, 4-bit NL-ADC (15 refs);
//   DistilBERT tile:    as Inception-V3 but with signed 6-bit inputs, as the
//                       inputs of a projection layer can be negative.
//
// The centers are non-uniform, denser near zero, and given in data units;
// one data unit is SCALE = 2 * UNIT MAC units and one ramp cell stands for
// UNIT MAC units (pulse_w = UNIT), so every midpoint reference is a whole
// number of cells: R_0 = SCALE * C_0 takes -2 C_0 cells of the initial ramp,
// step i takes C_i - C_(i-2) cells (C_1 - C_0 for the first step). The
// expected result is the nearest center to the directly computed dot product,
// ties to the upper center, ends clamped. Outputs at both clamps and in the
// interior must all occur in each tile; each operation must take
// 63 + S (UNIT + 2) + 7 cycles for S = 2^adc_bits - 1 comparisons.
module tb_workload_tiles;
  import nladc_pkg::*;

  logic clk = 0, rst_n;
  logic w_we, w_ready, ref_we, step_we, lut_we, start, busy, done;
  logic [7:0] w_row, ref_row;
  logic signed [3:0] w_data [COLS];
  cell_t ref_cell;
  logic [2:0] in_bits, w_bits, adc_bits;
  logic [7:0] n_init, pulse_w, step_cells;
  logic [6:0] step_addr, lut_addr;
  logic signed [5:0] lut_data;
  logic signed [7:0] x [ROWS];
  logic [6:0] code [COLS];
  logic signed [5:0] data [COLS];

  nladc_imc_macro dut (.*);
  always #5 clk = ~clk;

  localparam int VECS = 12;
  int centers [15];
  int ncent;
  int wt [ROWS][COLS];
  int checks = 0, failures = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int nearest(int mac, int scale);
    int best, bd;
    best = centers[0];
    bd = mac - scale * centers[0];
    if (bd < 0) bd = -bd;
    for (int i = 1; i < ncent; i++) begin
      int d;
      d = mac - scale * centers[i];
      if (d < 0) d = -d;
      if (d <= bd) begin bd = d; best = centers[i]; end
    end
    return best;
  endfunction

  // Programs the ADC for the current centers and runs one tile.
  task automatic run_tile(string name, int wb, int ab, int unit, bit signed_in);
    int k, lrows, wmax, scale, s, n_low, n_high, n_mid, fail0;
    k = (1 << (wb - 1)) - 1;
    lrows = ROWS / k;
    wmax = k;
    scale = 2 * unit;
    s = (1 << ab) - 1;
    n_low = 0; n_high = 0; n_mid = 0;
    fail0 = failures;

    @(negedge clk);
    w_bits = 3'(wb); adc_bits = 3'(ab); pulse_w = 8'(unit);
    n_init = 8'(-2 * centers[0]);
    for (int j = 1; j < s; j++) begin
      @(negedge clk);
      step_we = 1; step_addr = 7'(j);
      step_cells = 8'((j == 1) ? centers[1] - centers[0] : centers[j] - centers[j - 2]);
    end
    @(negedge clk) step_we = 0;
    for (int i = 0; i <= s; i++) begin
      @(negedge clk);
      lut_we = 1; lut_addr = 7'(i); lut_data = 6'(centers[(i == 0) ? 0 : i - 1]);
    end
    @(negedge clk) lut_we = 0;

    for (int r = 0; r < lrows; r++) begin
      @(negedge clk);
      for (int c = 0; c < COLS; c++) begin
        wt[r][c] = int'($urandom_range(2 * wmax)) - wmax;
        w_data[c] = 4'(wt[r][c]);
      end
      w_we = 1; w_row = 8'(r);
      @(negedge clk) w_we = 0;
      while (!w_ready) @(negedge clk);
    end

    for (int v = 0; v < VECS; v++) begin
      int xv [ROWS];
      int lat;
      @(negedge clk);
      for (int i = 0; i < ROWS; i++) begin
        xv[i] = 0;
        if (i < lrows)
          xv[i] = signed_in ? int'($urandom_range(126)) - 63 : int'($urandom_range(63));
        x[i] = 8'(xv[i]);
      end
      start = 1;
      @(negedge clk) start = 0;
      lat = 1;
      while (!done && lat < 100000) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 63 + s * (unit + 2) + 7) begin
        failures++;
        $display("FAIL %s latency %0d", name, lat);
      end
      for (int c = 0; c < COLS; c++) begin
        int acc, e;
        acc = 0;
        for (int r = 0; r < lrows; r++) acc += wt[r][c] * xv[r];
        e = nearest(acc, scale);
        if (e == centers[0]) n_low++;
        else if (e == centers[ncent - 1]) n_high++;
        else n_mid++;
        checks++;
        if (int'(data[c]) != e) begin
          failures++;
          if (failures < 20) $display("FAIL %s vec %0d col %0d mac=%0d data=%0d nearest=%0d",
                                      name, v, c, acc, data[c], e);
        end
      end
    end
    checks++;
    if (n_low == 0 || n_high == 0 || n_mid == 0) begin
      failures++;
      $display("FAIL %s range not covered", name);
    end
    $display("%s: %0d logical rows, %0d outputs, clamped low=%0d high=%0d interior=%0d, failures=%0d",
             name, lrows, VECS * COLS, n_low, n_high, n_mid, failures - fail0);
  endtask

  initial begin
    rst_n = 0; w_we = 0; ref_we = 0; step_we = 0; lut_we = 0; start = 0;
    w_row = 0; ref_row = 0; ref_cell = CELL_ZERO; in_bits = 6; w_bits = 2; adc_bits = 4;
    n_init = 0; pulse_w = 1; step_addr = 0; step_cells = 0; lut_addr = 0; lut_data = 0;
    for (int c = 0; c < COLS; c++) w_data[c] = 0;
    for (int i = 0; i < ROWS; i++) x[i] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // reference column: calibration cells at zero, every ramp cell +1
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      ref_we = 1; ref_row = 8'(r); ref_cell = (r < CAL_CELLS) ? CELL_ZERO : CELL_POS;
    end
    @(negedge clk) ref_we = 0;

    ncent = 7;
    centers[0:6] = '{-24, -12, -5, 0, 5, 12, 24};
    run_tile("VGG-16 tile (w3/adc3)", 3, 3, 27, 0);

    ncent = 15;
    centers = '{-30, -22, -16, -11, -7, -4, -2, 0, 2, 4, 7, 11, 16, 22, 30};
    run_tile("Inception-V3 tile (w4/adc4)", 4, 4, 33, 0);
    run_tile("DistilBERT tile (w4/adc4, signed inputs)", 4, 4, 33, 1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
