// grst_controller: asks for an early gamma reset once every column has spiked.
//
// In a winner-take-all temporal network, once every column of the final layer
// has produced an output spike nothing more can happen in the gamma cycle, so
// the rest of it is idle time. This block keeps one spike_checker per column
// and ANDs their outputs into grst_control; grst_generator then ends the gamma
// cycle on the next clock edge instead of waiting for the full period.
//
// Interface and timing: columns[c][n] is the output spike of neuron n of
// column c of the final layer. grst_control is combinational: high in the
// clock in which the last column's first spike arrives, and afterwards until
// the flags are cleared by grst or rst (the clock after grst). rst is active
// high.
//
// Follows the published structure (per-column OR and flag, AND over columns,
// cleared by reset or grst). The defaults, 676 columns of 12 neurons, are the
// largest controller evaluated; a smaller network can use it with the unused
// column inputs tied to 1.
module grst_controller #(
  parameter int unsigned COLUMNS = c3s_pkg::COLUMNS_DEF,
  parameter int unsigned NEURONS = c3s_pkg::NEURONS_DEF
) (
  input  logic                            clk,
  input  logic                            rst,
  input  logic                            grst,
  input  logic [COLUMNS-1:0][NEURONS-1:0] columns,
  output logic                            grst_control
);

  logic [COLUMNS-1:0] col_spiked;
  logic               clear;

  assign clear = rst | grst;

  for (genvar c = 0; c < COLUMNS; c++) begin : g_col
    spike_checker #(.NEURONS(NEURONS)) u_spike_checker (
      .clk       (clk),
      .clear     (clear),
      .neuron_out(columns[c]),
      .spiked    (col_spiked[c])
    );
  end

  assign grst_control = &col_spiked;

endmodule
