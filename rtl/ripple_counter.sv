// ripple_counter: the per-column ripple counter (RCNT) that converts the
// thermometer-coded SA pulses into a binary ADC code.
//
// It is an asynchronous up counter of toggle stages: stage 0 toggles on each
// rising edge of the count input, stage i toggles on each falling edge of
// stage i-1. No common clock is needed, which is why it is small and cheap.
// The count settles within WIDTH stage delays after a count edge. clr_n clears
// all stages asynchronously. The count wraps after 2^WIDTH - 1 pulses; a
// WIDTH-bit counter is enough for a WIDTH-bit ADC, which issues at most
// 2^WIDTH - 1 comparisons.
//
// Follows the design: a ripple counter per column, thermometer to binary.
// Own choices: toggle-stage structure, asynchronous clear, width = maximum
// ADC resolution (7).
module ripple_counter #(
  parameter int WIDTH = 7
) (
  input  logic             clr_n,
  input  logic             cnt_in,
  output logic [WIDTH-1:0] q
);

  // tick[i] is the clock of stage i: the count input for stage 0, the
  // inverted output of the previous stage for the others (falling edge).
  logic [WIDTH:0] tick;
  assign tick[0] = cnt_in;

  for (genvar i = 0; i < WIDTH; i++) begin : g_stage
    logic b;
    always_ff @(posedge tick[i] or negedge clr_n) begin
      if (!clr_n) b <= 1'b0;
      else        b <= ~b;
    end
    assign tick[i+1] = ~b;
    assign q[i]      = b;
  end

endmodule
