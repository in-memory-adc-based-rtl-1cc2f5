// tb_rwl_driver: random signed inputs at every input and weight resolution.
// For each physical row the testbench counts how many cycles RWL+ and RWL- are
// high during the PWM window and compares with the expected pulse length: the
// saturated magnitude of the logical input that feeds the row (row / K), on the
// line given by its sign, and zero for rows past the last whole group. It also
// checks the window length (pwm_busy high for 2^in_bits - 1 cycles) and that
// ADC-phase masks reach the word lines one cycle later.
module tb_rwl_driver;
  import nladc_pkg::*;
  logic clk = 0, rst_n, pwm_start, pwm_busy, adc_en;
  logic signed [7:0] x [ROWS];
  logic [2:0] in_bits, w_bits;
  logic [ROWS-1:0] adc_p, adc_n, rwl_p, rwl_n;
  int cnt_p [ROWS], cnt_n [ROWS];
  int checks = 0, failures = 0;

  rwl_driver dut (.clk, .rst_n, .pwm_start, .x, .in_bits, .w_bits, .pwm_busy,
                  .adc_en, .adc_p, .adc_n, .rwl_p, .rwl_n);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    for (int r = 0; r < ROWS; r++) begin
      cnt_p[r] += int'(rwl_p[r]);
      cnt_n[r] += int'(rwl_n[r]);
    end
  end

  initial begin
    rst_n = 0; pwm_start = 0; adc_en = 0; adc_p = '0; adc_n = '0;
    in_bits = 6; w_bits = 2;
    for (int r = 0; r < ROWS; r++) x[r] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 24; t++) begin
      int ib, wb, k, lim, busy_cycles;
      ib = 1 + (t % 7);
      wb = 2 + (t % 3);
      k  = (wb == 2) ? 1 : (wb == 3) ? 3 : 7;
      lim = (1 << ib) - 1;
      @(negedge clk);
      in_bits = 3'(ib); w_bits = 3'(wb);
      for (int r = 0; r < ROWS; r++) x[r] = 8'($urandom_range(255));
      x[0] = -128; x[1] = 127; x[2] = 0;
      for (int r = 0; r < ROWS; r++) begin cnt_p[r] = 0; cnt_n[r] = 0; end
      pwm_start = 1;
      @(negedge clk) pwm_start = 0;
      busy_cycles = 0;
      while (pwm_busy) begin busy_cycles++; @(negedge clk); end
      repeat (2) @(negedge clk);
      checks++;
      if (busy_cycles != lim) begin
        failures++;
        $display("FAIL window in_bits=%0d busy=%0d exp=%0d", ib, busy_cycles, lim);
      end
      for (int r = 0; r < ROWS; r++) begin
        int v, m, ep, en;
        if (r / k < ROWS / k) v = int'(x[r / k]); else v = 0;
        m  = (v < 0) ? -v : v;
        if (m > lim) m = lim;
        ep = (v > 0) ? m : 0;
        en = (v < 0) ? m : 0;
        checks++;
        if (cnt_p[r] != ep || cnt_n[r] != en) begin
          failures++;
          if (failures < 10)
            $display("FAIL t=%0d row %0d x=%0d p=%0d n=%0d exp %0d/%0d", t, r, v, cnt_p[r], cnt_n[r], ep, en);
        end
      end
    end
    // ADC-phase pass-through
    for (int t = 0; t < 8; t++) begin
      logic [ROWS-1:0] pp, nn;
      pp = {ROWS/32{$urandom}}; nn = {ROWS/32{$urandom}} & ~pp;
      @(negedge clk);
      adc_en = 1; adc_p = pp; adc_n = nn;
      @(negedge clk);
      adc_en = 0;
      checks++;
      if (rwl_p !== pp || rwl_n !== nn) begin failures++; $display("FAIL adc pass-through"); end
      @(negedge clk);
      checks++;
      if (rwl_p !== '0 || rwl_n !== '0) begin failures++; $display("FAIL lines not released"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
