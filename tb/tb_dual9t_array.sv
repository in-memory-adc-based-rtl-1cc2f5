// tb_dual9t_array: fills the full 256 x 128 array with random ternary weights,
// applies random RWL+/RWL- patterns for a number of cycles with S1 on, and
// checks every column's V_MAC against sum_k W_k X_k computed in the testbench.
// Then, with S1 off, applies more word-line activity and checks that V_MAC is
// held; finally checks that precharge clears it.
module tb_dual9t_array;
  import nladc_pkg::*;
  localparam int R = ROWS, C = COLS;
  logic clk = 0, wr_en, pch, s1;
  logic [7:0] wr_row;
  cell_t wr_data [C];
  logic [R-1:0] rwl_p, rwl_n;
  logic signed [VW-1:0] v_mac [C];
  int wt [R][C];
  int exp_v [C];
  int checks = 0, failures = 0;

  dual9t_array dut (.clk, .wr_en, .wr_row, .wr_data, .rwl_p, .rwl_n, .pch, .s1, .v_mac);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all(string what);
    for (int c = 0; c < C; c++) begin
      checks++;
      if (v_mac[c] !== exp_v[c]) begin
        failures++;
        if (failures < 10) $display("FAIL %s col %0d v=%0d exp=%0d", what, c, v_mac[c], exp_v[c]);
      end
    end
  endtask

  initial begin
    wr_en = 0; pch = 0; s1 = 0; rwl_p = '0; rwl_n = '0; wr_row = 0;
    for (int r = 0; r < R; r++) begin
      @(negedge clk);
      wr_en = 1; wr_row = 8'(r);
      for (int c = 0; c < C; c++) begin
        int v;
        v = int'($urandom_range(2)) - 1;
        wt[r][c] = v;
        wr_data[c] = (v > 0) ? CELL_POS : (v < 0) ? CELL_NEG : CELL_ZERO;
      end
    end
    @(negedge clk) wr_en = 0; pch = 1;
    @(negedge clk) pch = 0; s1 = 1;
    for (int c = 0; c < C; c++) exp_v[c] = 0;
    for (int t = 0; t < 20; t++) begin
      for (int r = 0; r < R; r++) begin
        int u;
        u = $urandom_range(3);
        rwl_p[r] = (u == 1);
        rwl_n[r] = (u == 2);
        for (int c = 0; c < C; c++) exp_v[c] += wt[r][c] * ((u == 1) ? 1 : (u == 2) ? -1 : 0);
      end
      @(negedge clk);
    end
    rwl_p = '0; rwl_n = '0;
    @(negedge clk);
    check_all("MAC");
    s1 = 0;
    for (int t = 0; t < 10; t++) begin
      rwl_p = {R/32{$urandom}};
      rwl_n = ~rwl_p;
      @(negedge clk);
    end
    rwl_p = '0; rwl_n = '0;
    @(negedge clk);
    check_all("hold with S1 off");
    pch = 1;
    @(negedge clk) pch = 0;
    for (int c = 0; c < C; c++) exp_v[c] = 0;
    check_all("precharge");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
