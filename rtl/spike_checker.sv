// spike_checker: remembers whether one column has spiked in this gamma cycle.
//
// The column's neuron outputs and a flag flip-flop are ORed together. The flag
// takes the OR result each clock unless reset or grst is high, so once any
// neuron spikes the output stays 1 until the next gamma reset.
//
// Interface and timing: neuron_out (NEURONS spikes) in; clear = reset or grst;
// spiked out. spiked rises combinationally in the clock of the first spike and
// falls in the clock after clear. A spike in the same clock as clear shows on
// spiked for that clock but is not kept.
//
// Follows the published structure (OR over the column, flip-flop storing the
// OR output, cleared by reset or grst).
module spike_checker #(
  parameter int unsigned NEURONS = c3s_pkg::NEURONS_DEF
) (
  input  logic               clk,
  input  logic               clear,
  input  logic [NEURONS-1:0] neuron_out,
  output logic               spiked
);

  logic flag_q;

  assign spiked = (|neuron_out) | flag_q;

  always_ff @(posedge clk) flag_q <= spiked & ~clear;

endmodule
