// grst_generator: gamma-cycle reset generator with early termination.
//
// A gamma cycle is the time window in which a temporal network's columns may
// spike; it ends with a one-clock gamma reset, grst, that clears every column.
// This block is an up counter. When the count would reach PERIOD, or when the
// controller raises grst_control (every column of the final layer has already
// spiked), it drives grst high for one clock and restarts the count. That
// clock, the "wait" step, is the first clock of the new gamma cycle, and
// grst_control is not looked at during it.
//
// Interface and timing:
//   grst          registered; high for exactly one clock. Without grst_control
//                 it rises every PERIOD clocks; with grst_control high in a
//                 clock (and grst low), it rises on the next clock edge.
//   rst           synchronous, active high; clears the count and grst.
//
// Follows the published flow: counter++, compare with PERIOD, OR with
// grst_control, counter to 0 and grst = 1, wait one clock, grst = 0. The
// reset polarity and the exact clock in which the count restarts are this
// design's choices.
module grst_generator #(
  parameter int unsigned PERIOD = c3s_pkg::PERIOD_DEF
) (
  input  logic clk,
  input  logic rst,
  input  logic grst_control,
  output logic grst
);

  localparam int unsigned CW = $clog2(PERIOD + 1);

  logic [CW-1:0] counter, count_inc;

  assign count_inc = counter + 1'b1;

  always_ff @(posedge clk) begin
    if (rst) begin
      counter <= '0;
      grst    <= 1'b0;
    end else if (grst) begin
      grst    <= 1'b0;            // wait one clock, then grst = 0
      counter <= count_inc;
    end else if (count_inc == CW'(PERIOD) || grst_control) begin
      grst    <= 1'b1;            // end the gamma cycle
      counter <= '0;
    end else begin
      counter <= count_inc;
    end
  end

  a_grst_one_clock: assert property (@(posedge clk) disable iff (rst) grst |=> !grst);
  a_count_bound:    assert property (@(posedge clk) disable iff (rst) counter < CW'(PERIOD));

endmodule
