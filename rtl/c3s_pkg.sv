// c3s_pkg: constants and types shared by the pos-neg encoder, the relaxed
// gamma-cycle control and the STDP case logic.
//
// The numeric defaults are the configuration evaluated for these blocks:
// 8-bit pixels, a threshold of 127, 784-pixel (28x28) images encoded 49 pixels
// per clock, a 16-clock gamma cycle, and a 676-column, 12-neuron final layer.
// The STDP case indices follow the order of the stdp_cases bus; which case
// sits on which bit is this design's reading of the case-generation schematic.
package c3s_pkg;

  localparam int unsigned PIXEL_W_DEF    = 8;
  localparam int unsigned THRESHOLD_DEF  = 127;
  localparam int unsigned IMG_PIXELS_DEF = 784;
  localparam int unsigned NCMP_DEF       = 49;
  localparam int unsigned PERIOD_DEF     = 16;
  localparam int unsigned COLUMNS_DEF    = 676;
  localparam int unsigned NEURONS_DEF    = 12;

  // Bit positions of the one-hot STDP case vector.
  typedef enum int unsigned {
    CASE_CAPTURE = 0,  // input and output spiked, input no later than output
    CASE_MINUS   = 1,  // input and output spiked, output earlier
    CASE_SEARCH  = 2,  // input spiked, no output
    CASE_BACKOFF = 3,  // output spiked, no input
    CASE_INF     = 4   // neither spiked: x(t) = z(t) = infinity
  } stdp_case_e;

  localparam int unsigned N_STDP_CASES = 5;

  // Bernoulli random bits used by one synapse's weight update.
  typedef struct packed {
    logic capture_brv;
    logic minus_brv;
    logic search_brv;
    logic backoff_brv;
    logic inf_brv;
    logic fout_brv;
    logic min_brv;
  } stdp_brv_t;

endpackage
