// tb_nladc_imc_macro: end-to-end test of the full-size macro (256 x 128, all
// parameters at their defaults).
//
// For each configuration the testbench loads the weights through the
// multi-bit loader, programs the replica column, the ramp step table and the
// code table, then runs several operations on random inputs. Expected results
// are computed independently: the exact dot product sum_i x_i w_i of each
// column (after input and weight saturation), the ladder of reference levels
// that the programmed cells produce (V_0 = -pulse_w * (calibration cells +
// initial-ramp cells), V_j = V_{j-1} + pulse_w * (cells of step j)), the code
// = number of levels not above the dot product, and the table value of that
// code. The conversion time start -> done is checked against
// (2^in_bits - 1) + (2^adc_bits - 1)(pulse_w + 2) + 7 cycles.
//
// Configurations: the 4-bit example layer (6-bit inputs, 2-bit weights), whose
// reference levels are derived here from its quantization centers with the
// midpoint rule R_0 = C_0, R_i = (C_{i-1} + C_i) / 2; the same converter with
// a calibration offset; the 3-bit ResNet-18 setting (6/2/3 bits); a 7-bit
// converter with 3-bit weights; a 1-bit converter with 4-bit weights.
// Mechanisms counted (each must occur): codes at both ends of the range,
// negative MAC results, input saturation, weight saturation, a calibration
// offset, every weight resolution, S1 holding V_MAC while the ramp pulses the
// shared word lines.
module tb_nladc_imc_macro;
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

  int checks = 0, failures = 0;
  int wlog [ROWS][COLS];      // logical weights as loaded (before saturation)
  int refw [ROWS];            // reference-column cells
  int steps [128];
  int lut [128];
  int levels [128];
  // mechanism counters
  int n_code_min = 0, n_code_max = 0, n_neg_mac = 0, n_in_sat = 0, n_w_sat = 0;
  int n_cal = 0, n_wbits [5], n_hold = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat(int v, int lim);
    return (v > lim) ? lim : (v < -lim) ? -lim : v;
  endfunction

  task automatic load_weights(int wb, int amp_lo);
    int k, nlog, lim;
    k = (1 << (wb - 1)) - 1;
    nlog = ROWS / k;
    lim = k;
    n_wbits[wb]++;
    w_bits = 3'(wb);
    for (int i = 0; i < nlog; i++) begin
      @(negedge clk);
      while (!w_ready) @(negedge clk);
      for (int c = 0; c < COLS; c++) begin
        int v;
        v = int'($urandom_range(2 * lim + 1)) - lim - 1;  // -(lim+1) .. lim
        if (amp_lo != 0 && $urandom_range(3) != 0) v = 0;
        wlog[i][c] = v;
        w_data[c] = 4'(v);
      end
      w_we = 1; w_row = 8'(i);
      @(negedge clk) w_we = 0;
    end
    while (!w_ready) @(negedge clk);
  endtask

  task automatic load_ref(int cal [4]);
    for (int r = 0; r < ROWS; r++) begin
      refw[r] = (r < CAL_CELLS) ? cal[r] : 1;
      @(negedge clk);
      ref_we = 1; ref_row = 8'(r);
      ref_cell = (refw[r] > 0) ? CELL_POS : (refw[r] < 0) ? CELL_NEG : CELL_ZERO;
    end
    @(negedge clk) ref_we = 0;
  endtask

  task automatic load_steps(int nsteps);
    for (int j = 1; j < 127; j++) begin
      @(negedge clk);
      step_we = 1; step_addr = 7'(j); step_cells = 8'(steps[j]);
    end
    @(negedge clk) step_we = 0;
  endtask

  task automatic load_lut();
    for (int i = 0; i < 128; i++) begin
      @(negedge clk);
      lut_we = 1; lut_addr = 7'(i); lut_data = 6'(lut[i]);
    end
    @(negedge clk) lut_we = 0;
  endtask

  // Reference ladder produced by the programmed cells.
  task automatic compute_levels(int b, int ni, int pw);
    int v, ptr, nsteps;
    nsteps = (1 << b) - 1;
    v = 0;
    for (int r = 0; r < CAL_CELLS; r++) v -= pw * refw[r];
    for (int r = CAL_CELLS; r < CAL_CELLS + ni && r < ROWS; r++) v -= pw * refw[r];
    levels[0] = v;
    ptr = CAL_CELLS;
    for (int j = 1; j < nsteps; j++) begin
      for (int r = ptr; r < ptr + steps[j] && r < ROWS; r++) v += pw * refw[r];
      ptr += steps[j];
      levels[j] = v;
    end
  endtask

  task automatic operate(int ib, int wb, int b, int ni, int pw, int xamp, string tag);
    int k, nlog, xlim, wlim, nsteps, lat, explat;
    int mac [COLS];
    k = (1 << (wb - 1)) - 1;
    nlog = ROWS / k;
    xlim = (1 << ib) - 1;
    wlim = k;
    nsteps = (1 << b) - 1;
    @(negedge clk);
    in_bits = 3'(ib); adc_bits = 3'(b); n_init = 8'(ni); pulse_w = 8'(pw);
    for (int i = 0; i < ROWS; i++) begin
      int v;
      v = int'($urandom_range(2 * xamp)) - xamp;
      if ($urandom_range(4) == 0) v = 0;
      x[i] = 8'(v);
    end
    for (int c = 0; c < COLS; c++) begin
      mac[c] = 0;
      for (int i = 0; i < nlog; i++) begin
        if (int'(x[i]) > xlim || int'(x[i]) < -xlim) n_in_sat++;
        if (wlog[i][c] < -wlim) n_w_sat++;
        mac[c] += sat(int'(x[i]), xlim) * sat(wlog[i][c], wlim);
      end
    end
    compute_levels(b, ni, pw);
    start = 1;
    @(negedge clk) start = 0;
    lat = 1;
    while (!done && lat < 100000) begin
      if (dut.s1 == 0 && dut.u_ramp.adc_en && (|dut.rwl_p || |dut.rwl_n)) n_hold++;
      @(negedge clk);
      lat++;
    end
    explat = xlim + nsteps * (pw + 2) + 7;
    checks++;
    if (lat != explat) begin
      failures++;
      $display("FAIL %s latency %0d expected %0d", tag, lat, explat);
    end
    for (int c = 0; c < COLS; c++) begin
      int ec;
      ec = 0;
      for (int j = 0; j < nsteps; j++) if (levels[j] <= mac[c]) ec++;
      if (ec == 0) n_code_min++;
      if (ec == nsteps) n_code_max++;
      if (mac[c] < 0) n_neg_mac++;
      checks += 2;
      if (int'(code[c]) != ec) begin
        failures++;
        if (failures < 20) $display("FAIL %s col %0d mac=%0d code=%0d expected %0d", tag, c, mac[c], code[c], ec);
      end
      if (int'(data[c]) != lut[ec]) begin
        failures++;
        if (failures < 20) $display("FAIL %s col %0d data=%0d expected %0d", tag, c, data[c], lut[ec]);
      end
    end
  endtask

  // Example layer: 4-bit code -> 6-bit data.
  int fig_data [16] = '{-16, -16, -10, -6, -4, -3, -2, -1, 0, 1, 2, 3, 4, 6, 10, 16};

  initial begin
    int cal0 [4] = '{0, 0, 0, 0};
    int cal3 [4] = '{-1, -1, -1, 0};
    int centers [15];
    int refs [15];
    int unit;
    rst_n = 0; w_we = 0; ref_we = 0; step_we = 0; lut_we = 0; start = 0;
    w_row = 0; ref_row = 0; ref_cell = CELL_ZERO; in_bits = 6; w_bits = 2; adc_bits = 4;
    n_init = 0; pulse_w = 1; step_addr = 0; step_cells = 0; lut_addr = 0; lut_data = 0;
    for (int c = 0; c < COLS; c++) w_data[c] = 0;
    for (int i = 0; i < ROWS; i++) x[i] = 0;
    for (int i = 0; i < 5; i++) n_wbits[i] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // ---- code table: the 4-bit example, identity above
    for (int i = 0; i < 128; i++) lut[i] = (i < 16) ? fig_data[i] : (i % 64) - 32;
    load_lut();

    // ---- configuration 1: 4-bit example layer, 6-bit inputs, 2-bit weights.
    // Centers in MAC units are 10 x the 6-bit data; references by the midpoint
    // rule; one cell pulsed for 5 cycles is 5 units.
    unit = 5;
    for (int i = 0; i < 15; i++) centers[i] = 10 * fig_data[i + 1];
    refs[0] = centers[0];
    for (int i = 1; i < 15; i++) refs[i] = (centers[i - 1] + centers[i]) / 2;
    for (int j = 0; j < 128; j++) steps[j] = 1;
    for (int j = 1; j < 15; j++) steps[j] = (refs[j] - refs[j - 1]) / unit;
    load_steps(15);
    load_ref(cal0);
    load_weights(2, 1);
    for (int t = 0; t < 3; t++) operate(6, 2, 4, -refs[0] / unit, unit, 4 + 2 * t, "4b-example");
    checks++;
    if (levels[14] != refs[14] || levels[0] != refs[0]) begin
      failures++;
      $display("FAIL ladder %0d..%0d differs from references %0d..%0d", levels[0], levels[14], refs[0], refs[14]);
    end
    operate(6, 2, 4, -refs[0] / unit, unit, 63, "4b-example-wide");

    // ---- configuration 2: same converter, calibration cells -1 -1 -1 0 and
    // the example step layout 6,4,2,1..1,2,4,6 with single-cycle pulses.
    load_ref(cal3);
    n_cal++;
    steps[1] = 6; steps[2] = 4; steps[3] = 2;
    for (int j = 4; j < 12; j++) steps[j] = 1;
    steps[12] = 2; steps[13] = 4; steps[14] = 6;
    load_steps(15);
    for (int t = 0; t < 2; t++) operate(6, 2, 4, 16, 1, 2, "4b-calibrated");

    // ---- configuration 3: ResNet-18 setting, 6-bit input, 2-bit weight, 3-bit ADC
    load_ref(cal0);
    steps[1] = 3; steps[2] = 2; steps[3] = 1; steps[4] = 1; steps[5] = 2; steps[6] = 3;
    load_steps(7);
    for (int t = 0; t < 2; t++) operate(6, 2, 3, 6, 8, 3, "3b-resnet");

    // ---- configuration 4: 7-bit ADC, 3-bit weights, 4-bit inputs
    for (int j = 1; j < 127; j++) steps[j] = 1 + (j % 2);
    load_steps(127);
    load_weights(3, 1);
    for (int t = 0; t < 2; t++) operate(4, 3, 7, 95, 1, 3 + 17 * t, "7b");

    // ---- configuration 5: 1-bit ADC (sign detector), 4-bit weights, 7-bit inputs
    load_weights(4, 0);
    for (int t = 0; t < 2; t++) operate(7, 4, 1, 0, 1, 127, "1b");

    // ---- mechanisms
    checks++;
    if (n_code_min == 0 || n_code_max == 0 || n_neg_mac == 0 || n_in_sat == 0 || n_w_sat == 0 ||
        n_cal == 0 || n_wbits[2] == 0 || n_wbits[3] == 0 || n_wbits[4] == 0 || n_hold == 0) begin
      failures++;
      $display("FAIL mechanism not exercised");
    end
    $display("mechanisms: code_min=%0d code_max=%0d neg_mac=%0d in_sat=%0d w_sat=%0d cal=%0d w2=%0d w3=%0d w4=%0d s1_hold=%0d",
             n_code_min, n_code_max, n_neg_mac, n_in_sat, n_w_sat, n_cal, n_wbits[2], n_wbits[3], n_wbits[4], n_hold);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
