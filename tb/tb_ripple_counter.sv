// tb_ripple_counter: drives random numbers of count pulses into the ripple
// counter, with random spacing, and checks the binary count after each burst,
// the wrap after 2^WIDTH pulses and the asynchronous clear.
module tb_ripple_counter;
  localparam int W = 7;
  logic         clr_n, cnt_in;
  logic [W-1:0] q;
  int checks = 0, failures = 0;

  ripple_counter #(.WIDTH(W)) dut (.clr_n, .cnt_in, .q);

  task automatic pulses(int n);
    repeat (n) begin
      #(1 + $urandom_range(3)) cnt_in = 1'b1;
      #(1 + $urandom_range(3)) cnt_in = 1'b0;
    end
    #5;
  endtask

  task automatic check(int exp, string what);
    checks++;
    if (q !== W'(exp)) begin
      failures++;
      $display("FAIL %s: q=%0d expected %0d", what, q, exp);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cnt_in = 1'b0;
    clr_n  = 1'b1;
    #2 clr_n = 1'b0;
    #10 clr_n = 1'b1;
    #5 check(0, "after clear");
    for (int t = 0; t < 40; t++) begin
      int n;
      n = $urandom_range((1 << W) - 1);
      clr_n = 1'b0;
      #3 clr_n = 1'b1;
      #3 check(0, "clear");
      pulses(n);
      check(n, "burst");
    end
    // accumulate across bursts and wrap
    clr_n = 1'b0; #3 clr_n = 1'b1;
    pulses(100); check(100, "100");
    pulses(27);  check(127, "127 (full scale of a 7-bit ADC)");
    pulses(1);   check(0, "wrap");
    pulses(5);   check(5, "after wrap");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
