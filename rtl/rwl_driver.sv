// rwl_driver: read-word-line (RWL) drivers of the macro.
//
// Every physical row has two word lines, RWL+ and RWL-. During the MAC phase
// the driver turns each signed input into a pulse-width-modulated (PWM) pulse:
// a positive input drives RWL+, a negative one RWL-, for |x| clock cycles.
// During the ADC phase the same word lines carry the ramp pulses chosen by the
// NL-ADC ramp controller (adc_en, adc_p, adc_n); the word lines are shared by
// the MAC columns and the ADC column, as drawn for this macro.
//
// Multi-bit weights occupy K = 2^(w_bits-1)-1 physical rows (1, 3 or 7 cells
// per weight). Logical input i is therefore fanned out to physical rows
// i*K .. i*K+K-1; rows past the last whole group stay idle.
//
// Interface and timing: pwm_start (one cycle) latches x[], in_bits and w_bits.
// The PWM window then lasts T = 2^in_bits - 1 cycles, during which pwm_busy is
// high; |x| saturates at T. The word-line outputs are registered, so a line
// is high one cycle after the counter value that enables it, and stays high
// for exactly |x| cycles. Outside a PWM window the lines follow adc_p/adc_n
// one cycle later when adc_en is high, and are low otherwise.
//
// Follows the design: PWM inputs, sign on RWL+/RWL-, parallel cells for
// multi-bit weights, input resolution 1-7 bits. Own choices: two's-complement
// input word, saturation, the row grouping of multi-bit weights and the
// one-cycle output register.
module rwl_driver
  import nladc_pkg::*;
#(
  parameter int NROWS = ROWS,
  parameter int XW    = IN_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    pwm_start,
  input  logic signed [XW-1:0]    x [NROWS],   // logical inputs
  input  logic [2:0]              in_bits,     // 1..7
  input  logic [2:0]              w_bits,      // 2..4
  output logic                    pwm_busy,
  input  logic                    adc_en,
  input  logic [NROWS-1:0]        adc_p,
  input  logic [NROWS-1:0]        adc_n,
  output logic [NROWS-1:0]        rwl_p,
  output logic [NROWS-1:0]        rwl_n
);

  logic [MAX_IN_BITS-1:0] mag [NROWS];
  logic [NROWS-1:0]       neg;
  logic [MAX_IN_BITS-1:0] t, t_last;

  // Saturating magnitude of a two's-complement input.
  function automatic logic [MAX_IN_BITS-1:0] sat_mag(logic signed [XW-1:0] v,
                                                     logic [MAX_IN_BITS-1:0] lim);
    logic [XW:0] a;
    a = (v < 0) ? (XW+1)'(-$signed({v[XW-1], v})) : (XW+1)'($signed({v[XW-1], v}));
    return (a > (XW+1)'(lim)) ? lim : a[MAX_IN_BITS-1:0];
  endfunction

  // Cells per weight for a weight resolution.
  function automatic int cells_per_w(logic [2:0] wb);
    case (wb)
      3'd3:    return 3;
      3'd4:    return 7;
      default: return 1;
    endcase
  endfunction

  logic [2:0]             in_bits_c;
  logic [MAX_IN_BITS-1:0] lim;
  int                     k;
  assign in_bits_c = (in_bits == 0) ? 3'd1 : in_bits;
  assign lim       = MAX_IN_BITS'((1 << in_bits_c) - 1);
  assign k         = cells_per_w(w_bits);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pwm_busy <= 1'b0;
      t        <= '0;
      t_last   <= '0;
      neg      <= '0;
      rwl_p    <= '0;
      rwl_n    <= '0;
      for (int r = 0; r < NROWS; r++) mag[r] <= '0;
    end else begin
      if (pwm_start) begin
        for (int r = 0; r < NROWS; r++) begin
          if (r / k < NROWS / k) begin
            mag[r] <= sat_mag(x[r / k], lim);
            neg[r] <= x[r / k] < 0;
          end else begin
            mag[r] <= '0;
            neg[r] <= 1'b0;
          end
        end
        t        <= '0;
        t_last   <= lim - 1'b1;
        pwm_busy <= 1'b1;
        rwl_p    <= '0;
        rwl_n    <= '0;
      end else if (pwm_busy) begin
        for (int r = 0; r < NROWS; r++) begin
          rwl_p[r] <= (mag[r] > t) && !neg[r];
          rwl_n[r] <= (mag[r] > t) &&  neg[r];
        end
        t <= t + 1'b1;
        if (t == t_last) pwm_busy <= 1'b0;
      end else if (adc_en) begin
        rwl_p <= adc_p;
        rwl_n <= adc_n;
      end else begin
        rwl_p <= '0;
        rwl_n <= '0;
      end
    end
  end

  // A new PWM window starts only after the previous one has ended.
  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) pwm_start |-> !pwm_busy)
    else $error("pwm_start during a PWM window");

endmodule
