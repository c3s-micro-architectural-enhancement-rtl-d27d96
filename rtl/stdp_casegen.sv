// stdp_casegen: STDP case generation for one synapse.
//
// In a gamma cycle a synapse sees an input spike at time x(t) (ein) and its
// neuron's output spike at time z(t) (eout); either may be absent (time
// infinity). The weight update depends on which of five cases occurred:
//
//   stdp_cases[0] capture  both spiked, input no later than output
//   stdp_cases[1] minus    both spiked, output earlier than input
//   stdp_cases[2] search   input only
//   stdp_cases[3] backoff  output only
//   stdp_cases[4] inf      neither: x(t) = z(t) = infinity (the case added
//                          so that the relaxed gamma cycle still updates)
//
// ein and eout are edge-coded: high from the spike until grst. e_both and
// e_one say whether both or exactly one of them are high; eout_only (output
// high, input not) marks an output that came first, and pulse2edge holds it
// as greater. The vector is one-hot at every clock and is meant to be sampled
// in the clock in which grst is high, at the end of the gamma cycle.
//
// Interface: clk, rstb (active low), grst, ein, eout in; stdp_cases[4:0] out,
// combinational from the inputs and the greater flag.
//
// The ports, the internal signal names and the added case 4 follow the
// published design. Which bit carries which of cases 0 to 3 is this design's
// reading of the published schematic and of the usual temporal-network STDP
// rule.
module stdp_casegen
  import c3s_pkg::*;
(
  input  logic                    clk,
  input  logic                    rstb,
  input  logic                    grst,
  input  logic                    ein,
  input  logic                    eout,
  output logic [N_STDP_CASES-1:0] stdp_cases
);

  logic e_both, e_one, eout_only, greater;

  assign e_both    = ein & eout;
  assign e_one     = ein ^ eout;
  assign eout_only = eout & ~ein;

  pulse2edge u_pe (
    .clk      (clk),
    .rstb     (rstb),
    .grst     (grst),
    .eout_only(eout_only),
    .greater  (greater)
  );

  always_comb begin
    stdp_cases               = '0;
    stdp_cases[CASE_CAPTURE] = e_both & ~greater;
    stdp_cases[CASE_MINUS]   = e_both &  greater;
    stdp_cases[CASE_SEARCH]  = e_one  & ~greater;
    stdp_cases[CASE_BACKOFF] = e_one  &  greater;
    stdp_cases[CASE_INF]     = ~ein   & ~eout;
  end

  a_one_hot: assert property (@(posedge clk) disable iff (!rstb) $onehot(stdp_cases));

endmodule
