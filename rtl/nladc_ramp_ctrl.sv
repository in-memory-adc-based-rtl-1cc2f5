// nladc_ramp_ctrl: reference-generation controller of the reconfigurable
// in-memory NL-ADC.
//
// An N-bit conversion makes 2^N - 1 comparisons, one after each ramp step.
// Step 0 is the initial ramp: RWL- is pulsed on the four calibration cells
// (rows 0..3) and on the first n_init cells below them, which drives V_ADC to
// the negative starting level V_initcalib. Steps 1 .. 2^N - 2 each pulse RWL+
// on the next group of cells, so each raises V_ADC by (cells in the group) x
// (pulse length). The step groups are laid out back to back from row 4
// downward; the cell count of each step is programmable (step table), which
// is what makes the reference levels nonlinear and reconfigurable. An
// N-bit ramp fits when n_init and the sum of the step counts fit in the 252
// non-calibration rows.
//
// Interface: cfg_we/cfg_addr/cfg_cells write the cell count of step cfg_addr
// (1 .. 126). start (one cycle) begins a conversion with adc_bits (1..7),
// n_init and pulse_w (cycles per pulse, at least 1). Per step the controller
// spends pulse_w cycles with adc_en high and the row masks set, one quiet cycle
// while the word-line register and the column settle, and one cycle with
// sa_strobe high. busy is high from the cycle after start until done, a
// one-cycle pulse that is high three cycles after the last strobe, when the
// last SA pulse has been counted. A conversion thus takes
// (2^N - 1)(pulse_w + 2) + 3 cycles from the start edge to the cycle with done
// high.
//
// Follows the design: calibration cells, initial ramp with RWL-, steps with
// RWL+ and a programmable number of cells per step, 1-7 bit resolution. Own
// choices: contiguous row layout, the step table, the per-step timing and the
// strobe cycle.
module nladc_ramp_ctrl
  import nladc_pkg::*;
#(
  parameter int NROWS = ROWS,
  parameter int NCAL  = CAL_CELLS,
  parameter int MAXB  = MAX_BITS
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  cfg_we,
  input  logic [MAXB-1:0]       cfg_addr,
  input  logic [CELL_W-1:0]     cfg_cells,
  input  logic                  start,
  input  logic [2:0]            adc_bits,
  input  logic [CELL_W-1:0]     n_init,
  input  logic [PW_W-1:0]       pulse_w,
  output logic                  adc_en,
  output logic [NROWS-1:0]      adc_p,
  output logic [NROWS-1:0]      adc_n,
  output logic                  sa_strobe,
  output logic                  busy,
  output logic                  done
);

  typedef enum logic [2:0] {S_IDLE, S_PULSE, S_SETTLE, S_CMP, S_TAIL} state_t;

  localparam int NSTEPS = 1 << MAXB;

  logic [CELL_W-1:0] step_cells [NSTEPS];
  state_t            state;
  logic [MAXB-1:0]   step, last_step;
  logic [PW_W-1:0]   pcnt, pw_last;
  logic [9:0]        ptr;        // first row of the current step group
  logic [9:0]        lo, hi;     // row window pulsed in this step
  logic              tail_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NSTEPS; i++) step_cells[i] <= '0;
    end else if (cfg_we) begin
      step_cells[cfg_addr] <= cfg_cells;
    end
  end

  // Row window of the current step.
  always_comb begin
    if (step == '0) begin
      lo = 10'(NCAL);
      hi = 10'(NCAL) + 10'(n_init);
    end else begin
      lo = ptr;
      hi = ptr + 10'(step_cells[step]);
    end
  end

  logic [NROWS-1:0] in_win;
  always_comb begin
    for (int r = 0; r < NROWS; r++) in_win[r] = (10'(r) >= lo) && (10'(r) < hi);
  end

  always_comb begin
    adc_en = (state == S_PULSE);
    adc_p  = '0;
    adc_n  = '0;
    if (state == S_PULSE) begin
      for (int r = 0; r < NROWS; r++) begin
        if (step == '0) adc_n[r] = in_win[r] || (r < NCAL);
        else            adc_p[r] = in_win[r];
      end
    end
  end

  // Resolution clamped to 1..MAXB.
  logic [2:0] b;
  assign b = (adc_bits == 0) ? 3'd1 : (int'(adc_bits) > MAXB) ? 3'(MAXB) : adc_bits;

  assign sa_strobe = (state == S_CMP);
  assign busy      = (state != S_IDLE);

  // A row is never pulsed on RWL+ and RWL- at once.
  a_one_line: assert property (@(posedge clk) disable iff (!rst_n) (adc_p & adc_n) == '0)
    else $error("row pulsed on both word lines");

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      step      <= '0;
      last_step <= '0;
      pcnt      <= '0;
      pw_last   <= '0;
      ptr       <= '0;
      tail_cnt  <= 1'b0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          last_step <= MAXB'((1 << b) - 2);
          pw_last   <= (pulse_w == 0) ? '0 : pulse_w - 1'b1;
          step      <= '0;
          pcnt      <= '0;
          ptr       <= 10'(NCAL);
          state     <= S_PULSE;
        end
        S_PULSE: begin
          pcnt <= pcnt + 1'b1;
          if (pcnt == pw_last) state <= S_SETTLE;
        end
        S_SETTLE: state <= S_CMP;
        S_CMP: begin
          pcnt <= '0;
          if (step != '0) ptr <= hi;
          if (step == last_step) begin
            state    <= S_TAIL;
            tail_cnt <= 1'b0;
          end else begin
            step  <= step + 1'b1;
            state <= S_PULSE;
          end
        end
        S_TAIL: begin
          tail_cnt <= 1'b1;
          if (tail_cnt) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
