// stdp_incdec: STDP weight increment / decrement decision for one synapse.
//
// Each STDP case moves the weight by one unit u with some probability, given
// by a Bernoulli random bit (BRV) for that case: capture and search
// increment, minus and backoff decrement. The added case of a gamma cycle
// with no input and no output spike increments by 0.5u on average: it
// increments by u when inf_brv is 1, and the source of inf_brv makes it 1 with
// probability 0.5. stabilize_brv, made from fout_brv and min_brv, gates every
// update.
//
// Interface: stdp_cases[4:0] (one-hot, from stdp_casegen) and the BRV bundle
// in; inc and dec out, never both. Combinational; the synapse applies them to
// its weight at grst.
//
// Follows the published design in its ports and in the +0.5u rule for case 4.
// The published schematic routes case 4 and inf_brv into the decrement side
// while the published rule says increment; this design increments. How
// stabilize_brv is formed and that it gates every case are this design's
// choices.
module stdp_incdec
  import c3s_pkg::*;
(
  input  logic [N_STDP_CASES-1:0] stdp_cases,
  input  stdp_brv_t               brv,
  output logic                    inc,
  output logic                    dec
);

  logic stabilize_brv;

  assign stabilize_brv = brv.fout_brv | brv.min_brv;

  always_comb begin
    inc = stabilize_brv & ((stdp_cases[CASE_CAPTURE] & brv.capture_brv)
                         | (stdp_cases[CASE_SEARCH]  & brv.search_brv)
                         | (stdp_cases[CASE_INF]     & brv.inf_brv));
    dec = stabilize_brv & ((stdp_cases[CASE_MINUS]   & brv.minus_brv)
                         | (stdp_cases[CASE_BACKOFF] & brv.backoff_brv));
  end

endmodule
