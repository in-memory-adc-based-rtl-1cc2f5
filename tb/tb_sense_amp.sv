// tb_sense_amp: random V_MAC / V_ADC pairs, with and without strobe; checks
// that V_ON pulses in the next cycle exactly when strobed and V_ADC <= V_MAC,
// including the equality case, and that it never stays high without a strobe.
module tb_sense_amp;
  import nladc_pkg::*;
  logic clk = 0, rst_n, strobe, v_on;
  logic signed [VW-1:0] v_mac, v_adc;
  int checks = 0, failures = 0;

  sense_amp dut (.clk, .rst_n, .strobe, .v_mac, .v_adc, .v_on);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; strobe = 0; v_mac = 0; v_adc = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      logic exp;
      @(negedge clk);
      strobe = $urandom_range(1);
      v_mac  = $signed($urandom_range(400)) - 200;
      v_adc  = (t % 7 == 0) ? v_mac : $signed($urandom_range(400)) - 200;
      exp    = strobe && (v_mac - v_adc >= 0);
      @(negedge clk);
      checks++;
      if (v_on !== exp) begin
        failures++;
        $display("FAIL t=%0d strobe=%0b vmac=%0d vadc=%0d von=%0b", t, strobe, v_mac, v_adc, v_on);
      end
      strobe = 0;
      @(negedge clk);
      checks++;
      if (v_on !== 1'b0) begin
        failures++;
        $display("FAIL v_on held without strobe");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
