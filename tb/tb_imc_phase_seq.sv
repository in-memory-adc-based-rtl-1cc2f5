// tb_imc_phase_seq: runs the sequencer against simple models of the word-line
// drivers (pwm_busy high for T cycles after pwm_start) and the ramp controller
// (ramp_done R cycles after ramp_start) for random T and R. It checks the
// order and length of every phase: PCH_MAC, pwm_start and the counter clear in
// the one cycle after start; S1 high from the next cycle through the cycle in
// which pwm_busy is first low (T + 1 cycles); one HOLD cycle with PCH_ADC and
// ramp_start and S1 low; S1 low for the whole ramp; done one cycle after
// ramp_done, busy from start to done, and start ignored while busy.
module tb_imc_phase_seq;
  logic clk = 0, rst_n, start, pwm_busy, ramp_done;
  logic pch_mac, pch_adc, s1, pwm_start, ramp_start, rcnt_clr_n, busy, done;
  int checks = 0, failures = 0;
  int T, R, pwm_left, ramp_left;

  imc_phase_seq dut (.clk, .rst_n, .start, .pwm_busy, .ramp_done, .pch_mac, .pch_adc, .s1,
                     .pwm_start, .ramp_start, .rcnt_clr_n, .busy, .done);
  always #5 clk = ~clk;

  // environment models
  always_ff @(posedge clk) begin
    if (pwm_start) pwm_left <= T;
    else if (pwm_left > 0) pwm_left <= pwm_left - 1;
    if (ramp_start) ramp_left <= R;
    else if (ramp_left > 0) ramp_left <= ramp_left - 1;
  end
  assign pwm_busy  = pwm_left > 0;
  assign ramp_done = ramp_left == 1;

  task automatic expect1(logic got, logic exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %0b exp %0b", what, got, exp); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; start = 0; T = 1; R = 1; pwm_left = 0; ramp_left = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      T = 1 + $urandom_range(126);
      R = 2 + $urandom_range(300);
      @(negedge clk);
      expect1(busy, 0, "idle busy");
      start = 1;
      @(negedge clk) start = 0;
      // PCH cycle
      expect1(pch_mac, 1, "pch_mac"); expect1(pwm_start, 1, "pwm_start");
      expect1(rcnt_clr_n, 0, "counter clear"); expect1(s1, 0, "s1 in PCH");
      expect1(busy, 1, "busy");
      // MAC phase: T + 1 cycles of S1
      for (int i = 0; i < T + 1; i++) begin
        @(negedge clk);
        if (i == 0) start = 1;  // must be ignored
        expect1(s1, 1, $sformatf("s1 cycle %0d of %0d", i, T + 1));
        expect1(pch_mac, 0, "no pch in MAC");
        expect1(rcnt_clr_n, 1, "counter clear released");
        start = 0;
      end
      @(negedge clk);
      expect1(s1, 0, "s1 off in HOLD"); expect1(pch_adc, 1, "pch_adc");
      expect1(ramp_start, 1, "ramp_start");
      for (int i = 0; i < R; i++) begin
        @(negedge clk);
        expect1(s1, 0, "s1 off in RAMP");
        expect1(pch_adc, 0, "pch_adc once");
        expect1(done, 0, "early done");
      end
      @(negedge clk);
      expect1(done, 1, "done");
      @(negedge clk);
      expect1(done, 0, "done one cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
