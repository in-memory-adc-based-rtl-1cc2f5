// tb_weight_encoder: exhaustive over every 4-bit weight and the three weight
// resolutions. Checks that the signed sum of the cells equals the saturated
// weight, that every conducting cell has the weight's sign, that no cell past
// the group size K = 1/3/7 conducts and that the conducting cells form the
// 1/2/4 binary groups (cell 0, cells 1-2, cells 3-6 all-or-nothing).
module tb_weight_encoder;
  import nladc_pkg::*;
  logic signed [3:0] w;
  logic [2:0]        w_bits;
  cell_t             cells [MAX_CELLS_PER_W];
  int checks = 0, failures = 0;

  weight_encoder dut (.w, .w_bits, .cells);

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int wb = 2; wb <= 4; wb++) begin
      for (int v = -8; v <= 7; v++) begin
        int lim, k, exp, sum, nz;
        bit ok;
        w = 4'(v); w_bits = 3'(wb);
        #1;
        lim = (1 << (wb - 1)) - 1;
        k   = lim;
        exp = (v > lim) ? lim : (v < -lim) ? -lim : v;
        sum = 0; ok = 1;
        for (int j = 0; j < 7; j++) begin
          sum += cell_value(cells[j]);
          if (cells[j] == CELL_POS && v < 0) ok = 0;
          if (cells[j] == CELL_NEG && v > 0) ok = 0;
          if (j >= k && cells[j] != CELL_ZERO) ok = 0;
          if (cells[j] == 2'b11) ok = 0;
        end
        if (cells[1] != cells[2]) ok = 0;
        if (cells[3] != cells[4] || cells[3] != cells[5] || cells[3] != cells[6]) ok = 0;
        nz = (exp < 0) ? -exp : exp;
        checks++;
        if (sum != exp || !ok) begin
          failures++;
          $display("FAIL w=%0d wbits=%0d sum=%0d exp=%0d ok=%0b", v, wb, sum, exp, ok);
        end
        // explicit group pattern check
        checks++;
        if ((cells[0] != CELL_ZERO) != nz[0] ||
            (cells[1] != CELL_ZERO) != nz[1] ||
            (cells[3] != CELL_ZERO) != nz[2]) begin
          failures++;
          $display("FAIL grouping w=%0d wbits=%0d", v, wb);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
