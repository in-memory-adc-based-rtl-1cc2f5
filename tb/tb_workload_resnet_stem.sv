// tb_workload_resnet_stem: runs the first convolution of a CIFAR-style
// ResNet-18 (3x3 kernel, 3 input channels, 64 filters) on the full-size macro
// and checks that every output is rounded to the nearest quantization center.
//
// The 27 kernel weights of each filter (ternary, 2-bit) go to logical rows
// 0..26 of one column; filters use columns 0..63, the other columns hold zero.
// A synthetic 8x8x3 image of pixels 0..31 (6-bit inputs) is fed one 3x3x3 patch per
// operation (36 valid output positions). The ADC runs at 4 bits with the
// centers of the example layer (6-bit data -16..16, 10 MAC units per data
// unit); the ramp is derived from the centers by the midpoint rule with 5 units
// per cell. The expected result is computed from the convolution sum directly
// (nested loops over the image, not the patch vector) and the nearest center,
// ties going to the upper center and values beyond the ends clamped; it must
// equal the macro's data output. Outputs at both clamps and in the interior
// are counted and must all occur; the operation time must be 175 cycles.
module tb_workload_resnet_stem;
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

  localparam int H = 8, CH = 3, F = 64, UNIT = 5;
  int img [H][H][CH];
  int kern [F][3][3][CH];
  int centers [15] = '{-16, -10, -6, -4, -3, -2, -1, 0, 1, 2, 3, 4, 6, 10, 16};
  int refs [15];
  int checks = 0, failures = 0, n_low = 0, n_high = 0, n_mid = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int nearest(int mac);
    int best, bd;
    best = centers[0];
    bd = (mac - 10 * centers[0]) < 0 ? -(mac - 10 * centers[0]) : (mac - 10 * centers[0]);
    for (int i = 1; i < 15; i++) begin
      int d;
      d = mac - 10 * centers[i];
      if (d < 0) d = -d;
      if (d <= bd) begin bd = d; best = centers[i]; end
    end
    return best;
  endfunction

  initial begin
    rst_n = 0; w_we = 0; ref_we = 0; step_we = 0; lut_we = 0; start = 0;
    w_row = 0; ref_row = 0; ref_cell = CELL_ZERO; in_bits = 6; w_bits = 2; adc_bits = 4;
    n_init = 0; pulse_w = UNIT; step_addr = 0; step_cells = 0; lut_addr = 0; lut_data = 0;
    for (int c = 0; c < COLS; c++) w_data[c] = 0;
    for (int i = 0; i < ROWS; i++) x[i] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // data set
    for (int r = 0; r < H; r++) for (int c = 0; c < H; c++) for (int k = 0; k < CH; k++)
      img[r][c][k] = $urandom_range(31);
    for (int f = 0; f < F; f++) for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++)
      for (int k = 0; k < CH; k++) kern[f][a][b][k] = int'($urandom_range(2)) - 1;

    // references (midpoint rule) and ADC programming
    refs[0] = 10 * centers[0];
    for (int i = 1; i < 15; i++) refs[i] = 5 * (centers[i - 1] + centers[i]);
    n_init = 8'(-refs[0] / UNIT);
    for (int j = 1; j < 15; j++) begin
      @(negedge clk);
      step_we = 1; step_addr = 7'(j); step_cells = 8'((refs[j] - refs[j - 1]) / UNIT);
    end
    @(negedge clk) step_we = 0;
    for (int i = 0; i < 16; i++) begin
      @(negedge clk);
      lut_we = 1; lut_addr = 7'(i); lut_data = 6'(centers[(i == 0) ? 0 : i - 1]);
    end
    @(negedge clk) lut_we = 0;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      ref_we = 1; ref_row = 8'(r); ref_cell = (r < CAL_CELLS) ? CELL_ZERO : CELL_POS;
    end
    @(negedge clk) ref_we = 0;

    // weights: row i = (ky*3 + kx)*3 + ch
    for (int i = 0; i < ROWS; i++) begin
      @(negedge clk);
      for (int c = 0; c < COLS; c++) begin
        int v;
        v = 0;
        if (i < 27 && c < F) v = kern[c][i / 9][(i / 3) % 3][i % 3];
        w_data[c] = 4'(v);
      end
      w_we = 1; w_row = 8'(i);
      @(negedge clk) w_we = 0;
      while (!w_ready) @(negedge clk);
    end

    for (int oy = 0; oy < H - 2; oy++) begin
      for (int ox = 0; ox < H - 2; ox++) begin
        int lat;
        @(negedge clk);
        for (int i = 0; i < ROWS; i++) x[i] = 0;
        for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++) for (int k = 0; k < CH; k++)
          x[(a * 3 + b) * 3 + k] = 8'(img[oy + a][ox + b][k]);
        start = 1;
        @(negedge clk) start = 0;
        lat = 1;
        while (!done && lat < 10000) begin @(negedge clk); lat++; end
        checks++;
        if (lat != 63 + 15 * (UNIT + 2) + 7) begin
          failures++;
          $display("FAIL latency %0d", lat);
        end
        for (int f = 0; f < COLS; f++) begin
          int acc, e;
          acc = 0;
          if (f < F)
            for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++) for (int k = 0; k < CH; k++)
              acc += img[oy + a][ox + b][k] * kern[f][a][b][k];
          e = nearest(acc);
          if (e == centers[0]) n_low++; else if (e == centers[14]) n_high++; else n_mid++;
          checks++;
          if (int'(data[f]) != e) begin
            failures++;
            if (failures < 20) $display("FAIL (%0d,%0d) filter %0d conv=%0d data=%0d nearest=%0d",
                                        oy, ox, f, acc, data[f], e);
          end
        end
      end
    end
    checks++;
    if (n_low == 0 || n_high == 0 || n_mid == 0) begin
      failures++;
      $display("FAIL range not covered: low=%0d high=%0d mid=%0d", n_low, n_high, n_mid);
    end
    $display("outputs: clamped low=%0d clamped high=%0d interior=%0d", n_low, n_high, n_mid);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
