// tb_nladc_ref_column: programs the replica column like the example 4-bit
// converter (calibration cells -1 -1 -1 0, ramp cells +1), then checks the
// initial ramp (RWL- on calibration and ramp cells), a few RWL+ steps of
// different cell counts and pulse lengths, and the clearing by PCH_ADC.
module tb_nladc_ref_column;
  import nladc_pkg::*;
  logic clk = 0, wr_en, pch_adc;
  logic [7:0] wr_row;
  cell_t wr_cell;
  logic [ROWS-1:0] rwl_p, rwl_n;
  logic signed [VW-1:0] v_adc;
  int w [ROWS];
  int expv;
  int checks = 0, failures = 0;

  nladc_ref_column dut (.clk, .wr_en, .wr_row, .wr_cell, .rwl_p, .rwl_n, .pch_adc, .v_adc);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pulse(int lo, int hi, bit neg, int cycles);
    for (int r = lo; r < hi; r++) begin
      if (neg) expv -= cycles * w[r];
      else     expv += cycles * w[r];
    end
    repeat (cycles) begin
      for (int r = 0; r < ROWS; r++) begin
        rwl_p[r] = !neg && r >= lo && r < hi;
        rwl_n[r] =  neg && r >= lo && r < hi;
      end
      @(negedge clk);
    end
    rwl_p = '0; rwl_n = '0;
    @(negedge clk);
  endtask

  task automatic check(string what);
    checks++;
    if (v_adc !== expv) begin
      failures++;
      $display("FAIL %s v_adc=%0d exp=%0d", what, v_adc, expv);
    end
  endtask

  initial begin
    wr_en = 0; pch_adc = 0; rwl_p = '0; rwl_n = '0;
    for (int r = 0; r < ROWS; r++) begin
      w[r] = (r < 3) ? -1 : (r == 3) ? 0 : (r % 17 == 5) ? 0 : 1;
      @(negedge clk);
      wr_en = 1; wr_row = 8'(r);
      wr_cell = (w[r] > 0) ? CELL_POS : (w[r] < 0) ? CELL_NEG : CELL_ZERO;
    end
    @(negedge clk) wr_en = 0; pch_adc = 1;
    @(negedge clk) pch_adc = 0;
    expv = 0;
    check("after precharge");
    pulse(0, 20, 1, 5);  check("initial ramp with calibration");
    pulse(4, 10, 0, 5);  check("step of 6 cells");
    pulse(10, 14, 0, 5); check("step of 4 cells");
    pulse(14, 60, 0, 2); check("large step with zero cell");
    pulse(60, 61, 0, 1); check("single cell");
    pch_adc = 1;
    @(negedge clk) pch_adc = 0;
    expv = 0;
    check("PCH_ADC");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
