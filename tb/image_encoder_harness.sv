// image_encoder_harness: streams N_IMAGES random images back to back through
// one posneg_image_encoder configuration and checks it.
//
// Every result is compared with the pixels (threshold 127: above it exactly
// when bit 7 is set). The harness also measures the clocks from the first
// image taken to the last result and checks them against
// N_IMAGES * ceil(IMG_PIXELS / NCMP): with image_valid held high the encoder
// takes a new image in the last sampling clock of the previous one. The
// measured count is reported in `clocks`.
module image_encoder_harness #(
  parameter int unsigned IMG_PIXELS = 784,
  parameter int unsigned NCMP       = 49,
  parameter int unsigned N_IMAGES   = 3
) (
  input  logic   clk,
  input  logic   rst,
  output int     checks,
  output int     failures,
  output longint clocks,
  output logic   done
);
  localparam int unsigned NSAMP = (IMG_PIXELS + NCMP - 1) / NCMP;

  logic                    image_valid, image_ready, next_img;
  logic [IMG_PIXELS*8-1:0] image_in;
  logic [IMG_PIXELS-1:0]   pos_out, neg_out;

  posneg_image_encoder #(.IMG_PIXELS(IMG_PIXELS), .NCMP(NCMP)) dut (
    .clk(clk), .rst(rst), .image_valid(image_valid), .image_in(image_in),
    .image_ready(image_ready), .next_Img_signal(next_img),
    .image_pos_out(pos_out), .image_neg_out(neg_out));

  logic [IMG_PIXELS-1:0] exp_q[$];
  longint                cycle = 0, first_take = -1;
  int                    completed = 0;

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    checks = 0; failures = 0; done = 0; clocks = 0;
    image_valid = 0; image_in = '0;
    @(negedge rst);
    @(negedge clk);
    for (int i = 0; i < N_IMAGES; i++) begin
      logic [IMG_PIXELS-1:0] e;
      for (int p = 0; p < IMG_PIXELS; p++) begin
        image_in[p*8 +: 8] = 8'($urandom);
        e[p] = image_in[p*8+7];
      end
      image_valid = 1;
      @(posedge clk);
      while (!image_ready) @(posedge clk);
      if (first_take < 0) first_take = cycle;
      exp_q.push_back(e);
      #1;
    end
    image_valid = 0;
  end

  // Results are read in the clock in which next_Img_signal is high: with one
  // sample per image the next result replaces them one clock later.
  always @(negedge clk) if (!rst && next_img) begin
    logic [IMG_PIXELS-1:0] e;
    e = exp_q.pop_front();
    checks += 2;
    if (pos_out !== e)  begin failures++; $display("FAIL %0d px / %0d cmp: positive image %0d", IMG_PIXELS, NCMP, completed); end
    if (neg_out !== ~e) begin failures++; $display("FAIL %0d px / %0d cmp: negative image %0d", IMG_PIXELS, NCMP, completed); end
    completed++;
    if (completed == N_IMAGES) begin
      clocks = cycle - 1 - first_take;   // first image taken at edge first_take+1
      checks++;
      if (clocks != longint'(N_IMAGES * NSAMP)) begin
        failures++;
        $display("FAIL %0d px / %0d cmp: %0d images took %0d clocks, expected %0d",
                 IMG_PIXELS, NCMP, N_IMAGES, clocks, N_IMAGES * NSAMP);
      end
      done = 1;
    end
  end
endmodule
