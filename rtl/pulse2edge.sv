// pulse2edge: holds a pulse as a level until the end of the gamma cycle.
//
// Temporal networks code a spike as an edge: a line that rises at the spike
// time and stays high until the gamma reset. This block turns the pulse
// eout_only (the output spike is present while the input spike is not yet)
// into such an edge, greater: once eout_only has been high, greater stays
// high until grst or rstb. greater is also high combinationally in the clock
// of the pulse itself.
//
// Interface: clk; rstb (active low, synchronous); grst (clears); eout_only in;
// greater out.
//
// Its ports and its place in the STDP case generator follow the published
// schematic; its insides are this design's own (a set/clear flag).
module pulse2edge (
  input  logic clk,
  input  logic rstb,
  input  logic grst,
  input  logic eout_only,
  output logic greater
);

  logic flag_q;

  assign greater = flag_q | eout_only;

  always_ff @(posedge clk) begin
    if (!rstb || grst) flag_q <= 1'b0;
    else               flag_q <= greater;
  end

endmodule
