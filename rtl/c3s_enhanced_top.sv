// c3s_enhanced_top: pos-neg spike encoder, relaxed gamma-cycle control and the
// added STDP case, joined as they sit around a multi-layer temporal network.
//
// Data path. Images enter posneg_image_encoder (valid/ready handshake), which
// produces a positive and a negative 1-bit image in ceil(IMG_PIXELS/NCMP)
// clocks. At every gamma reset the newest encoded images are loaded into the
// layer_in register and held for the whole next gamma cycle: a 1 is an input
// spike at time 0 held as an edge, a 0 is no spike. layer_in[p] is positive
// pixel p, layer_in[IMG_PIXELS+p] negative pixel p. The same image is offered
// again in later gamma cycles until a new one has been encoded.
//
// Control. gamma_cycle_control watches the final layer's neuron spikes
// (final_layer_out, an input port: the layers themselves are outside this
// design) and drives grst, which ends each gamma cycle after PERIOD clocks or
// one clock after every final-layer column has spiked.
//
// Learning. One stdp_casegen and stdp_incdec per layer_in line forms the STDP
// logic of the synapses of one first-layer neuron, whose output edge comes in
// on neuron_out. syn_inc / syn_dec are valid in the clock in which grst is
// high, when the synapses apply them.
//
// Timing: layer_in changes on the clock edge that ends the grst clock. rst is
// synchronous and active high; the STDP logic takes it as its active-low rstb.
//
// The blocks follow the published designs; how they are joined here (the
// layer_in register and the single neuron's synapse bank) is this design's
// own, since the integration itself was left open.
module c3s_enhanced_top
  import c3s_pkg::*;
#(
  parameter int unsigned IMG_PIXELS = IMG_PIXELS_DEF,
  parameter int unsigned NCMP       = NCMP_DEF,
  parameter int unsigned PIXEL_W    = PIXEL_W_DEF,
  parameter int unsigned THRESHOLD  = THRESHOLD_DEF,
  parameter int unsigned COLUMNS    = COLUMNS_DEF,
  parameter int unsigned NEURONS    = NEURONS_DEF,
  parameter int unsigned PERIOD     = PERIOD_DEF
) (
  input  logic                            clk,
  input  logic                            rst,
  // image input
  input  logic                            image_valid,
  input  logic [IMG_PIXELS*PIXEL_W-1:0]   image_in,
  output logic                            image_ready,
  output logic                            next_Img_signal,
  // first layer input spikes (edges, held for a gamma cycle)
  output logic [2*IMG_PIXELS-1:0]         layer_in,
  // final layer output spikes and the gamma reset
  input  logic [COLUMNS-1:0][NEURONS-1:0] final_layer_out,
  output logic                            grst,
  output logic                            grst_early,
  // STDP of one first-layer neuron's synapses
  input  logic                            neuron_out,
  input  stdp_brv_t [2*IMG_PIXELS-1:0]    brv,
  output logic [2*IMG_PIXELS-1:0]         syn_inc,
  output logic [2*IMG_PIXELS-1:0]         syn_dec
);

  localparam int unsigned NSYN = 2 * IMG_PIXELS;

  logic [IMG_PIXELS-1:0] image_pos_out, image_neg_out;

  posneg_image_encoder #(
    .IMG_PIXELS(IMG_PIXELS),
    .NCMP      (NCMP),
    .PIXEL_W   (PIXEL_W),
    .THRESHOLD (THRESHOLD)
  ) u_encoder (
    .clk            (clk),
    .rst            (rst),
    .image_valid    (image_valid),
    .image_in       (image_in),
    .image_ready    (image_ready),
    .next_Img_signal(next_Img_signal),
    .image_pos_out  (image_pos_out),
    .image_neg_out  (image_neg_out)
  );

  gamma_cycle_control #(
    .COLUMNS(COLUMNS),
    .NEURONS(NEURONS),
    .PERIOD (PERIOD)
  ) u_gamma (
    .clk       (clk),
    .rst       (rst),
    .columns   (final_layer_out),
    .grst      (grst),
    .grst_early(grst_early)
  );

  // New gamma cycle, new input spikes.
  always_ff @(posedge clk) begin
    if (rst)       layer_in <= '0;
    else if (grst) layer_in <= {image_neg_out, image_pos_out};
  end

  for (genvar s = 0; s < NSYN; s++) begin : g_syn
    logic [N_STDP_CASES-1:0] cases;

    stdp_casegen u_casegen (
      .clk       (clk),
      .rstb      (~rst),
      .grst      (grst),
      .ein       (layer_in[s]),
      .eout      (neuron_out),
      .stdp_cases(cases)
    );

    stdp_incdec u_incdec (
      .stdp_cases(cases),
      .brv       (brv[s]),
      .inc       (syn_inc[s]),
      .dec       (syn_dec[s])
    );
  end

endmodule
