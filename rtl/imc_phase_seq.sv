// imc_phase_seq: phase sequencer of one macro operation (MAC, then NL-ADC).
//
// One operation runs: PCH (bit lines precharged, PCH_MAC active, ripple
// counters cleared) -> MAC (S1 on, PWM inputs applied; pwm_start is issued on
// leaving PCH) -> HOLD (S1 off so C_BL keeps V_MAC; PCH_ADC clears the ADC
// column) -> RAMP (the ramp controller runs; S1 stays off) -> done.
//
// Interface and timing: start is accepted in idle. pch_mac and rcnt_clr_n
// (active low) are asserted for the one PCH cycle. s1 is high from the cycle
// after PCH until the cycle in which pwm_busy is first seen low, so the last
// PWM pulse, registered one cycle late by the drivers, is still integrated.
// pch_adc is high for the one HOLD cycle and ramp_start is issued in the same
// cycle. done pulses one cycle after ramp_done; busy covers start to done.
//
// Follows the design: precharge, S1 on during the PWM inputs and off for the
// conversion, ADC-column precharge before the ramp. Own choices: the exact
// cycle of each edge, counter clearing at PCH.
module imc_phase_seq (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic pwm_busy,
  input  logic ramp_done,
  output logic pch_mac,
  output logic pch_adc,
  output logic s1,
  output logic pwm_start,
  output logic ramp_start,
  output logic rcnt_clr_n,
  output logic busy,
  output logic done
);

  typedef enum logic [2:0] {P_IDLE, P_PCH, P_MAC, P_HOLD, P_RAMP} phase_t;
  phase_t ph;

  assign pch_mac    = (ph == P_PCH);
  assign pwm_start  = (ph == P_PCH);
  assign s1         = (ph == P_MAC);
  assign pch_adc    = (ph == P_HOLD);
  assign ramp_start = (ph == P_HOLD);
  assign busy       = (ph != P_IDLE);

  // Counter clear is registered so that it is glitch free for the
  // asynchronous clear of the ripple counters.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rcnt_clr_n <= 1'b0;
    else        rcnt_clr_n <= !(ph == P_IDLE && start);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph   <= P_IDLE;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (ph)
        P_IDLE: if (start) ph <= P_PCH;
        P_PCH:  ph <= P_MAC;
        P_MAC:  if (!pwm_busy) ph <= P_HOLD;
        P_HOLD: ph <= P_RAMP;
        P_RAMP: if (ramp_done) begin
          ph   <= P_IDLE;
          done <= 1'b1;
        end
        default: ph <= P_IDLE;
      endcase
    end
  end

endmodule
