// tb_nladc_center_lut: loads the 4-bit code map of the example layer
// (codes 0..15 -> -16 -10 -6 -4 -3 -2 -1 0 1 2 3 4 6 10 16, code 0 and 1 both
// -16), plus random entries for codes 16..127, then reads random codes on all
// 128 columns at once and compares with the loaded values.
module tb_nladc_center_lut;
  import nladc_pkg::*;
  logic clk = 0, rst_n, we;
  logic [6:0] waddr;
  logic signed [5:0] wdata;
  logic [6:0] code [COLS];
  logic signed [5:0] data [COLS];
  logic signed [5:0] ref_tab [128];
  int checks = 0, failures = 0;
  int fig [16] = '{-16, -16, -10, -6, -4, -3, -2, -1, 0, 1, 2, 3, 4, 6, 10, 16};

  nladc_center_lut dut (.clk, .rst_n, .we, .waddr, .wdata, .code, .data);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; we = 0; waddr = 0; wdata = 0;
    for (int c = 0; c < COLS; c++) code[c] = 7'(c);
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    #1;
    for (int c = 0; c < COLS; c++) begin
      checks++;
      if (data[c] !== 6'sd0) begin failures++; $display("FAIL reset value col %0d", c); end
    end
    for (int i = 0; i < 128; i++) begin
      ref_tab[i] = (i < 16) ? 6'(fig[i]) : 6'($urandom_range(63));
      @(negedge clk);
      we = 1; waddr = 7'(i); wdata = ref_tab[i];
    end
    @(negedge clk) we = 0;
    for (int t = 0; t < 50; t++) begin
      for (int c = 0; c < COLS; c++) code[c] = (t < 25) ? 7'($urandom_range(15)) : 7'($urandom_range(127));
      #1;
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (data[c] !== ref_tab[code[c]]) begin
          failures++;
          $display("FAIL col %0d code %0d data %0d exp %0d", c, code[c], data[c], ref_tab[code[c]]);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
