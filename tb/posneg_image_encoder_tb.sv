// posneg_image_encoder_tb: the complete pos-neg encoder at its default size
// (784-pixel images, 49 comparators, threshold 127).
//
// Sends four corner-case images (all 0, all 127, all 128, all 255) and then a
// stream of random images back to back, holding image_valid high, the way a
// source would send one image after another. Expected images are computed in
// the testbench (a pixel is above 127 exactly when bit 7 is set). Checks
// every result, the 16-clock latency, and that the back-to-back stream keeps
// one image per 16 clocks.
module posneg_image_encoder_tb;
  localparam int IMG = 784, NSAMP = 16, N_RANDOM = 12;

  logic               clk = 0, rst = 1;
  logic               image_valid = 0, image_ready, next_img;
  logic [IMG*8-1:0]   image_in = '0;
  logic [IMG-1:0]     pos_out, neg_out;
  int                 checks = 0, failures = 0;
  longint             cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  posneg_image_encoder dut (
    .clk(clk), .rst(rst), .image_valid(image_valid), .image_in(image_in),
    .image_ready(image_ready), .next_Img_signal(next_img),
    .image_pos_out(pos_out), .image_neg_out(neg_out));

  logic [IMG-1:0] exp_q[$];
  longint         take_q[$];
  longint         first_take, last_done;
  int             completed = 0;

  function automatic logic [IMG-1:0] bit7(input logic [IMG*8-1:0] img);
    for (int p = 0; p < IMG; p++) bit7[p] = img[p*8+7];
  endfunction

  task automatic send(input logic [IMG*8-1:0] img, input bit keep_valid);
    @(negedge clk);
    image_in    = img;
    image_valid = 1;
    @(posedge clk);
    while (!image_ready) @(posedge clk);
    exp_q.push_back(bit7(img));
    take_q.push_back(cycle);
    #1;
    if (!keep_valid) image_valid = 0;
  endtask

  always @(posedge clk) begin
    if (!rst && next_img) begin
      logic [IMG-1:0] e;
      longint         t;
      #1;
      e = exp_q.pop_front();
      t = take_q.pop_front();
      checks += 3;
      if (pos_out !== e)  begin failures++; $display("FAIL image %0d positive", completed); end
      if (neg_out !== ~e) begin failures++; $display("FAIL image %0d negative", completed); end
      if (cycle - 2 - t != NSAMP) begin
        failures++;
        $display("FAIL image %0d latency %0d, expected %0d", completed, cycle - 2 - t, NSAMP);
      end
      completed++;
      last_done = cycle;
    end
  end

  initial begin
    logic [IMG*8-1:0] img;
    repeat (3) @(posedge clk);
    rst = 0;
    send({IMG{8'd0}},   0);
    send({IMG{8'd127}}, 0);
    send({IMG{8'd128}}, 0);
    send({IMG{8'd255}}, 0);
    wait (completed == 4);
    for (int i = 0; i < N_RANDOM; i++) begin
      for (int p = 0; p < IMG; p++) img[p*8 +: 8] = 8'($urandom);
      send(img, 1);
      if (i == 0) first_take = take_q[$];
    end
    image_valid = 0;
    wait (completed == 4 + N_RANDOM);
    @(posedge clk);
    // N_RANDOM images back to back: one per NSAMP clocks.
    checks++;
    if (last_done - 2 - first_take != longint'(N_RANDOM * NSAMP)) begin
      failures++;
      $display("FAIL stream of %0d images took %0d clocks, expected %0d",
               N_RANDOM, last_done - 2 - first_take, N_RANDOM * NSAMP);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
