// sense_amp: behavioural model of the double-differential sense amplifier
// (SA) of one MAC column. It is a behavioural model of an analog comparator.
//
// The SA compares the held column voltage V_MAC with the shared ramp V_ADC.
// When strobe is high it resolves, and in the next cycle v_on pulses high for
// one cycle if V_ADC does not exceed V_MAC, that is, if the current reference
// level lies at or below the MAC result. Over a monotonic ramp the pulses form
// a thermometer code in time, which the column's ripple counter turns into the
// ADC code (the index of the largest reference not above the input).
//
// Follows the design: one SA per column comparing V_MAC with the shared V_ADC,
// thermometer output counted by a ripple counter. Own choices: a clocked
// strobe, a one-cycle output pulse and ">=" at equality.
module sense_amp
  import nladc_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 strobe,
  input  logic signed [VW-1:0] v_mac,
  input  logic signed [VW-1:0] v_adc,
  output logic                 v_on
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v_on <= 1'b0;
    else        v_on <= strobe && (v_adc <= v_mac);
  end

endmodule
