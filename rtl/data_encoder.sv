// data_encoder: image buffer and sampler of the pos-neg spike encoder.
//
// A whole image (IMG_PIXELS pixels of PIXEL_W bits, pixel 0 in the low bits of
// image_in) is taken into a buffer in one clock. The buffer is then walked in
// NSAMP = ceil(IMG_PIXELS/NCMP) samples of NCMP consecutive pixels, one sample
// per clock: the low NCMP pixels of the buffer go out on pix_out to the
// comparator array, and the buffer shifts down by NCMP pixels. The positive and
// negative bits the array returns (posout, negout) are shifted into two
// accumulators from the top, so after NSAMP clocks sample 0 sits at the bottom
// and the accumulators hold the encoded image in pixel order. On that last
// clock they are copied to image_pos_out / image_neg_out, which then hold still
// until the next image is finished, and next_Img_signal pulses for one clock.
//
// Interface and timing:
//   image_valid/image_ready  an image is taken on a rising clk edge with both
//                            high; image_ready is high when idle and in the
//                            last sampling clock, so images can follow each
//                            other every NSAMP clocks.
//   next_Img_signal          rises exactly NSAMP clocks after the edge that
//                            took the image (16 for 784 pixels, 49 per clock).
//   rst                      synchronous, active high.
//
// Follows the published design: whole-image buffer, NCMP pixels per clock,
// results gathered until the whole image is encoded, completion signal to the
// source of images. Own choices: the valid/ready handshake and reset; samples
// are runs of consecutive pixels of the linear image; when NCMP does not divide
// IMG_PIXELS the spare comparators of the last sample see zero pixels and their
// bits are dropped.
module data_encoder #(
  parameter int unsigned IMG_PIXELS = c3s_pkg::IMG_PIXELS_DEF,
  parameter int unsigned NCMP       = c3s_pkg::NCMP_DEF,
  parameter int unsigned PIXEL_W    = c3s_pkg::PIXEL_W_DEF
) (
  input  logic                          clk,
  input  logic                          rst,
  input  logic                          image_valid,
  input  logic [IMG_PIXELS*PIXEL_W-1:0] image_in,
  output logic                          image_ready,
  // to / from comparator_parallel_units
  output logic [NCMP*PIXEL_W-1:0]       pix_out,
  input  logic [NCMP-1:0]               posout,
  input  logic [NCMP-1:0]               negout,
  // result
  output logic                          next_Img_signal,
  output logic [IMG_PIXELS-1:0]         image_pos_out,
  output logic [IMG_PIXELS-1:0]         image_neg_out
);

  localparam int unsigned NSAMP  = (IMG_PIXELS + NCMP - 1) / NCMP;
  localparam int unsigned PADPIX = NSAMP * NCMP;           // buffer size, pixels
  localparam int unsigned CNT_W  = (NSAMP > 1) ? $clog2(NSAMP) : 1;

  logic [PADPIX*PIXEL_W-1:0] pix_buf;
  logic [PADPIX-1:0]         pos_acc_nx, neg_acc_nx;
  logic [CNT_W-1:0]          samp_cnt;
  logic                      busy, last, take;

  assign last        = busy && (samp_cnt == CNT_W'(NSAMP - 1));
  assign image_ready = !busy || last;
  assign take        = image_valid && image_ready;
  assign pix_out     = pix_buf[NCMP*PIXEL_W-1:0];

  // The new sample enters at the top; after NSAMP clocks sample 0 is at the
  // bottom. The accumulators keep the NSAMP-1 samples gathered so far.
  if (NSAMP > 1) begin : g_acc
    logic [(NSAMP-1)*NCMP-1:0] pos_acc, neg_acc;
    assign pos_acc_nx = {posout, pos_acc};
    assign neg_acc_nx = {negout, neg_acc};
    always_ff @(posedge clk) begin
      if (rst) begin
        pos_acc <= '0;
        neg_acc <= '0;
      end else if (busy) begin
        pos_acc <= pos_acc_nx[PADPIX-1:NCMP];
        neg_acc <= neg_acc_nx[PADPIX-1:NCMP];
      end
    end
  end else begin : g_noacc
    assign pos_acc_nx = posout;
    assign neg_acc_nx = negout;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy            <= 1'b0;
      samp_cnt        <= '0;
      next_Img_signal <= 1'b0;
      pix_buf         <= '0;
      image_pos_out   <= '0;
      image_neg_out   <= '0;
    end else begin
      next_Img_signal <= last;
      if (busy) begin
        pix_buf  <= pix_buf >> (NCMP * PIXEL_W);
        samp_cnt <= samp_cnt + 1'b1;
      end
      if (last) begin
        busy          <= 1'b0;
        image_pos_out <= pos_acc_nx[IMG_PIXELS-1:0];
        image_neg_out <= neg_acc_nx[IMG_PIXELS-1:0];
      end
      if (take) begin
        busy     <= 1'b1;
        samp_cnt <= '0;
        pix_buf  <= (PADPIX*PIXEL_W)'(image_in);   // zero-extends the last sample
      end
    end
  end

  // The sample counter never runs past the last sample.
  a_cnt_range: assert property (@(posedge clk) disable iff (rst)
    busy |-> (32'(samp_cnt) < NSAMP));

endmodule
