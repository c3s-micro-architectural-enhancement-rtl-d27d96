// gamma_cycle_control: relaxed (asynchronous) gamma-cycle control.
//
// A fixed gamma cycle always costs PERIOD clocks even when the network has
// already answered. Here grst_generator produces the gamma reset every PERIOD
// clocks, and grst_controller, watching only the final layer, makes it come
// early as soon as every column has spiked. grst goes to every layer and back
// to the controller, which clears its per-column flags with it.
//
// Interface and timing: columns[c][n] are the final layer's neuron spikes;
// grst is a one-clock pulse, at the latest PERIOD clocks after the previous
// one, and one clock after the clock in which the last column first spikes.
// grst_early is high together with a grst that the controller caused (a
// status output of this design, for counting shortened cycles). rst is
// synchronous and active high.
module gamma_cycle_control #(
  parameter int unsigned COLUMNS = c3s_pkg::COLUMNS_DEF,
  parameter int unsigned NEURONS = c3s_pkg::NEURONS_DEF,
  parameter int unsigned PERIOD  = c3s_pkg::PERIOD_DEF
) (
  input  logic                            clk,
  input  logic                            rst,
  input  logic [COLUMNS-1:0][NEURONS-1:0] columns,
  output logic                            grst,
  output logic                            grst_early
);

  logic grst_control;

  grst_controller #(
    .COLUMNS(COLUMNS),
    .NEURONS(NEURONS)
  ) u_grst_controller (
    .clk         (clk),
    .rst         (rst),
    .grst        (grst),
    .columns     (columns),
    .grst_control(grst_control)
  );

  grst_generator #(.PERIOD(PERIOD)) u_grst_generator (
    .clk         (clk),
    .rst         (rst),
    .grst_control(grst_control),
    .grst        (grst)
  );

  // grst_early: the grst now high was requested by the controller.
  always_ff @(posedge clk) begin
    if (rst) grst_early <= 1'b0;
    else     grst_early <= !grst && grst_control;
  end

endmodule
