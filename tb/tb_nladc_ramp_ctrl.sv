// tb_nladc_ramp_ctrl: programs random cell counts into the step table and runs
// conversions at several resolutions, initial-ramp sizes and pulse lengths.
// Every cycle with adc_en high is checked against the row window expected for
// the current step (step = number of strobes so far): step 0 drives RWL- on the
// four calibration rows and the n_init rows below them; step j drives RWL+ on
// the rows that follow the previous steps' groups. It also checks the pulse
// length of each step, the number of strobes (2^N - 1) and the conversion time
// (2^N - 1)(pulse_w + 2) + 3 cycles from the start edge to the cycle with done high.
module tb_nladc_ramp_ctrl;
  import nladc_pkg::*;
  logic clk = 0, rst_n, cfg_we, start, adc_en, sa_strobe, busy, done;
  logic [6:0] cfg_addr;
  logic [7:0] cfg_cells, n_init, pulse_w;
  logic [2:0] adc_bits;
  logic [ROWS-1:0] adc_p, adc_n;
  int cells [128];
  int checks = 0, failures = 0;

  nladc_ramp_ctrl dut (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_cells, .start, .adc_bits,
                       .n_init, .pulse_w, .adc_en, .adc_p, .adc_n, .sa_strobe, .busy, .done);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int b, int ni, int pw);
    int nsteps, step, ptr, pcount, cyc, lo, hi;
    logic [ROWS-1:0] ep, en;
    nsteps = (1 << b) - 1;
    @(negedge clk);
    adc_bits = 3'(b); n_init = 8'(ni); pulse_w = 8'(pw); start = 1;
    @(negedge clk) start = 0;
    step = 0; ptr = CAL_CELLS; pcount = 0; cyc = 1;
    while (!done && cyc < 100000) begin
      if (step == 0) begin lo = CAL_CELLS; hi = CAL_CELLS + ni; end
      else begin lo = ptr; hi = ptr + cells[step]; end
      ep = '0; en = '0;
      for (int r = 0; r < ROWS; r++) begin
        if (step == 0) en[r] = (r < CAL_CELLS) || (r >= lo && r < hi);
        else           ep[r] = (r >= lo && r < hi);
      end
      if (adc_en) begin
        pcount++;
        checks++;
        if (adc_p !== ep || adc_n !== en) begin
          failures++;
          if (failures < 10) $display("FAIL b=%0d step %0d mask", b, step);
        end
      end else begin
        checks++;
        if (adc_p !== '0 || adc_n !== '0) begin failures++; $display("FAIL mask without adc_en"); end
      end
      if (sa_strobe) begin
        checks++;
        if (pcount != pw) begin
          failures++;
          $display("FAIL b=%0d step %0d pulse %0d cycles, exp %0d", b, step, pcount, pw);
        end
        pcount = 0;
        if (step != 0) ptr = hi;
        step++;
      end
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (step != nsteps) begin failures++; $display("FAIL b=%0d strobes %0d exp %0d", b, step, nsteps); end
    checks++;
    if (cyc != nsteps * (pw + 2) + 3) begin
      failures++;
      $display("FAIL b=%0d pw=%0d latency %0d exp %0d", b, pw, cyc, nsteps * (pw + 2) + 3);
    end
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL busy after done"); end
  endtask

  initial begin
    rst_n = 0; cfg_we = 0; start = 0; adc_bits = 4; n_init = 0; pulse_w = 1;
    cfg_addr = 0; cfg_cells = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // 4-bit layout in the spirit of the example: 6,4,2,1..1,2,4,6 (32 cells)
    for (int j = 1; j < 127; j++) cells[j] = 1 + $urandom_range(1);
    cells[1] = 6; cells[2] = 4; cells[3] = 2; cells[12] = 2; cells[13] = 4; cells[14] = 6;
    for (int j = 4; j < 12; j++) cells[j] = 1;
    for (int j = 1; j < 127; j++) begin
      @(negedge clk);
      cfg_we = 1; cfg_addr = 7'(j); cfg_cells = 8'(cells[j]);
    end
    @(negedge clk) cfg_we = 0;
    run(4, 16, 5);
    run(4, 16, 1);
    run(3, 8, 3);
    run(1, 20, 2);
    run(2, 3, 4);
    run(7, 90, 1);
    run(5, 0, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
