// posneg_image_encoder: binary-to-spike pos-neg encoder for whole images.
//
// Turns an 8-bit grey-scale image into two 1-bit images: the positive image
// marks pixels brighter than THRESHOLD, the negative image marks the others.
// In a temporal network a 1 becomes a spike at time 0 and a 0 no spike, so the
// two images are the network's input spikes. data_encoder buffers the image and
// walks it NCMP pixels per clock through comparator_parallel_units (NCMP
// comparator pairs), collecting the results.
//
// Interface and timing (see data_encoder): image_valid/image_ready handshake;
// next_Img_signal pulses ceil(IMG_PIXELS/NCMP) clocks after an image is taken
// (16 clocks for 784 pixels and 49 comparators), when image_pos_out and
// image_neg_out hold the result. rst is synchronous and active high.
//
// The split into a data encoder and a comparator array, and the default sizes,
// follow the published design; the handshake and reset are this design's own.
module posneg_image_encoder #(
  parameter int unsigned IMG_PIXELS = c3s_pkg::IMG_PIXELS_DEF,
  parameter int unsigned NCMP       = c3s_pkg::NCMP_DEF,
  parameter int unsigned PIXEL_W    = c3s_pkg::PIXEL_W_DEF,
  parameter int unsigned THRESHOLD  = c3s_pkg::THRESHOLD_DEF
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic                          image_valid,
  input  logic [IMG_PIXELS*PIXEL_W-1:0] image_in,
  output logic                          image_ready,
  output logic                          next_Img_signal,
  output logic [IMG_PIXELS-1:0]         image_pos_out,
  output logic [IMG_PIXELS-1:0]         image_neg_out
);

  logic [NCMP*PIXEL_W-1:0] sample;
  logic [NCMP-1:0]         posout, negout;

  data_encoder #(
    .IMG_PIXELS(IMG_PIXELS),
    .NCMP      (NCMP),
    .PIXEL_W   (PIXEL_W)
  ) u_data_encoder (
    .clk            (clk),
    .rst            (rst),
    .image_valid    (image_valid),
    .image_in       (image_in),
    .image_ready    (image_ready),
    .pix_out        (sample),
    .posout         (posout),
    .negout         (negout),
    .next_Img_signal(next_Img_signal),
    .image_pos_out  (image_pos_out),
    .image_neg_out  (image_neg_out)
  );

  comparator_parallel_units #(
    .NCMP     (NCMP),
    .PIXEL_W  (PIXEL_W),
    .THRESHOLD(THRESHOLD)
  ) u_posnegEncoder (
    .pix_in(sample),
    .posout(posout),
    .negout(negout)
  );

endmodule
