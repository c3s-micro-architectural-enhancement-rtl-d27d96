// data_encoder_harness: drives one data_encoder configuration and checks it.
//
// The comparator array is modelled here from the threshold 127 itself (a
// pixel is above it exactly when bit 7 is set), so the encoder's buffering,
// sampling order and result collection are checked against the pixels that
// were sent. N_IMAGES random images are sent, the first half back to back
// with image_valid held high and the rest after random gaps. For every
// completed image the harness checks both encoded images and that
// next_Img_signal came exactly ceil(IMG_PIXELS/NCMP) clocks after the image
// was taken. It counts back-to-back acceptances (an image taken in the last
// sampling clock of the previous one).
module data_encoder_harness #(
  parameter int unsigned IMG_PIXELS = 784,
  parameter int unsigned NCMP       = 49,
  parameter int unsigned N_IMAGES   = 8
) (
  input  logic clk,
  input  logic rst,
  output int   checks,
  output int   failures,
  output logic done
);
  localparam int unsigned NSAMP = (IMG_PIXELS + NCMP - 1) / NCMP;

  logic                    image_valid, image_ready, next_img;
  logic [IMG_PIXELS*8-1:0] image_in;
  logic [NCMP*8-1:0]       pix_out;
  logic [NCMP-1:0]         posout, negout;
  logic [IMG_PIXELS-1:0]   image_pos_out, image_neg_out;

  data_encoder #(.IMG_PIXELS(IMG_PIXELS), .NCMP(NCMP), .PIXEL_W(8)) dut (
    .clk(clk), .rst(rst), .image_valid(image_valid), .image_in(image_in),
    .image_ready(image_ready), .pix_out(pix_out), .posout(posout), .negout(negout),
    .next_Img_signal(next_img), .image_pos_out(image_pos_out), .image_neg_out(image_neg_out));

  // Comparator model: threshold 127 means "bit 7 set".
  always_comb
    for (int k = 0; k < NCMP; k++) begin
      posout[k] = pix_out[k*8+7];
      negout[k] = !pix_out[k*8+7];
    end

  logic [IMG_PIXELS-1:0] exp_q[$];
  longint                take_q[$];
  longint                cycle = 0;
  int                    completed = 0, back_to_back = 0;
  logic                  prev_ready_last;

  always @(posedge clk) cycle <= cycle + 1;

  // Expected result of an image: bit 7 of every pixel.
  function automatic logic [IMG_PIXELS-1:0] expected_pos(input logic [IMG_PIXELS*8-1:0] img);
    for (int p = 0; p < IMG_PIXELS; p++) expected_pos[p] = img[p*8+7];
  endfunction

  // Source of images.
  initial begin
    checks = 0; failures = 0; done = 0;
    image_valid = 0; image_in = '0;
    @(negedge rst);
    for (int i = 0; i < N_IMAGES; i++) begin
      @(negedge clk);
      if (i >= N_IMAGES / 2) repeat ($urandom_range(0, 3)) @(negedge clk);
      for (int p = 0; p < IMG_PIXELS; p++)
        image_in[p*8 +: 8] = ($urandom_range(0, 3) == 0) ? 8'd126 + 8'($urandom_range(0, 2)) : 8'($urandom);
      image_valid = 1;
      @(posedge clk);
      while (!image_ready) @(posedge clk);
      exp_q.push_back(expected_pos(image_in));
      take_q.push_back(cycle);
      if (dut.busy) back_to_back++;
      #1;
      if (i >= N_IMAGES / 2 - 1) image_valid = 0;
    end
    image_valid = 0;
  end

  // Result checker.
  always @(posedge clk) begin
    if (!rst && next_img) begin
      #1;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL next_Img_signal with no image outstanding");
      end else begin
        logic [IMG_PIXELS-1:0] e;
        longint                t;
        e = exp_q.pop_front();
        t = take_q.pop_front();
        checks += 3;
        if (image_pos_out !== e) begin
          failures++;
          $display("FAIL image %0d positive output wrong", completed);
        end
        if (image_neg_out !== ~e) begin
          failures++;
          $display("FAIL image %0d negative output wrong", completed);
        end
        // The image was taken at edge t+1. next_Img_signal, set at edge t+1+L,
        // is seen here one edge later, after which cycle = t+2+L.
        if (cycle - 2 - t != longint'(NSAMP)) begin
          failures++;
          $display("FAIL image %0d latency %0d clocks, expected %0d", completed, cycle - 2 - t, NSAMP);
        end
        completed++;
        if (completed == N_IMAGES) begin
          checks++;
          if (back_to_back == 0) begin
            failures++;
            $display("FAIL no image was taken back to back");
          end
          done = 1;
        end
      end
    end
  end
endmodule
