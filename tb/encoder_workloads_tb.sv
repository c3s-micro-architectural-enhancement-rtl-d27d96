// encoder_workloads_tb: the encoder configurations that were evaluated.
//
// Image sizes of 49, 784, 1028, 1080 and 2160 pixels at 49 comparators; a
// 784-pixel image at 1, 2, 4, 8, 16, 100, 196, 250, 400, 625 and 784
// comparators (including counts that do not divide 784, where the last sample
// is short); and a stream of 60 784-pixel images, one second of a 60 Hz
// source. Each configuration is one image_encoder_harness, which checks every
// encoded image and that an image costs ceil(pixels / comparators) clocks.
// The clocks measured are printed; at a 1 GHz clock they are nanoseconds.
module encoder_workloads_tb;
  localparam int NCFG = 16;
  logic   clk = 0, rst = 1;
  int     c[NCFG], f[NCFG];
  longint t[NCFG];
  logic   [NCFG-1:0] d;
  int     checks, failures;

  always #5 clk = ~clk;

  image_encoder_harness #(.IMG_PIXELS(49), .NCMP(49), .N_IMAGES(3)) h0 (.clk, .rst, .checks(c[0]), .failures(f[0]), .clocks(t[0]), .done(d[0]));
  image_encoder_harness #(.IMG_PIXELS(784), .NCMP(49), .N_IMAGES(60)) h1 (.clk, .rst, .checks(c[1]), .failures(f[1]), .clocks(t[1]), .done(d[1]));
  image_encoder_harness #(.IMG_PIXELS(1028), .NCMP(49), .N_IMAGES(3)) h2 (.clk, .rst, .checks(c[2]), .failures(f[2]), .clocks(t[2]), .done(d[2]));
  image_encoder_harness #(.IMG_PIXELS(1080), .NCMP(49), .N_IMAGES(3)) h3 (.clk, .rst, .checks(c[3]), .failures(f[3]), .clocks(t[3]), .done(d[3]));
  image_encoder_harness #(.IMG_PIXELS(2160), .NCMP(49), .N_IMAGES(3)) h4 (.clk, .rst, .checks(c[4]), .failures(f[4]), .clocks(t[4]), .done(d[4]));
  image_encoder_harness #(.IMG_PIXELS(784), .NCMP(1), .N_IMAGES(2)) h5 (.clk, .rst, .checks(c[5]), .failures(f[5]), .clocks(t[5]), .done(d[5]));
  image_encoder_harness #(.IMG_PIXELS(784), .NCMP(2), .N_IMAGES(2)) h6 (.clk, .rst, .checks(c[6]), .failures(f[6]), .clocks(t[6]), .done(d[6]));
  image_encoder_harness #(.IMG_PIXELS(784), .NCMP(4), .N_IMAGES(2)) h7 (.clk, .rst, .checks(c[7]), .failures(f[7]), .clocks(t[7]), .done(d[7]));
  image_encoder_harness #(.IMG_PIXELS(784), .NCMP(8), .N_IMAGES(2)) h8 (.clk, .rst, .checks(c[8]), .failures(f[8]), .clocks(t[8]), .done(d[8]));
  image_encoder_harness #(.IMG_PIXELS(784), .NCMP(16), .N_IMAGES(2)) h9 (.clk, .rst, .checks(c[9]), .failures(f[9]), .clocks(t[9]), .done(d[9]));
  image_encoder_harness #(.IMG_PIXELS(784), .NCMP(100), .N_IMAGES(2)) h10 (.clk, .rst, .checks(c[10]), .failures(f[10]), .clocks(t[10]), .done(d[10]));
  image_encoder_harness #(.IMG_PIXELS(784), .NCMP(196), .N_IMAGES(2)) h11 (.clk, .rst, .checks(c[11]), .failures(f[11]), .clocks(t[11]), .done(d[11]));
  image_encoder_harness #(.IMG_PIXELS(784), .NCMP(250), .N_IMAGES(2)) h12 (.clk, .rst, .checks(c[12]), .failures(f[12]), .clocks(t[12]), .done(d[12]));
  image_encoder_harness #(.IMG_PIXELS(784), .NCMP(400), .N_IMAGES(2)) h13 (.clk, .rst, .checks(c[13]), .failures(f[13]), .clocks(t[13]), .done(d[13]));
  image_encoder_harness #(.IMG_PIXELS(784), .NCMP(625), .N_IMAGES(2)) h14 (.clk, .rst, .checks(c[14]), .failures(f[14]), .clocks(t[14]), .done(d[14]));
  image_encoder_harness #(.IMG_PIXELS(784), .NCMP(784), .N_IMAGES(2)) h15 (.clk, .rst, .checks(c[15]), .failures(f[15]), .clocks(t[15]), .done(d[15]));

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    @(posedge clk);
    wait (&d);
    checks = 0;
    failures = 0;
    for (int i = 0; i < NCFG; i++) begin
      checks += c[i];
      failures += f[i];
    end
    $display("%-40s %0d clocks for 3 image(s), %0d per image", "49-pixel image, 49 comparators", t[0], t[0] / 3);
    $display("%-40s %0d clocks for 60 image(s), %0d per image", "60 MNIST-size images, 49 comparators", t[1], t[1] / 60);
    $display("%-40s %0d clocks for 3 image(s), %0d per image", "1028-pixel image, 49 comparators", t[2], t[2] / 3);
    $display("%-40s %0d clocks for 3 image(s), %0d per image", "1080-pixel image, 49 comparators", t[3], t[3] / 3);
    $display("%-40s %0d clocks for 3 image(s), %0d per image", "2160-pixel image, 49 comparators", t[4], t[4] / 3);
    $display("%-40s %0d clocks for 2 image(s), %0d per image", "784-pixel image, 1 comparators", t[5], t[5] / 2);
    $display("%-40s %0d clocks for 2 image(s), %0d per image", "784-pixel image, 2 comparators", t[6], t[6] / 2);
    $display("%-40s %0d clocks for 2 image(s), %0d per image", "784-pixel image, 4 comparators", t[7], t[7] / 2);
    $display("%-40s %0d clocks for 2 image(s), %0d per image", "784-pixel image, 8 comparators", t[8], t[8] / 2);
    $display("%-40s %0d clocks for 2 image(s), %0d per image", "784-pixel image, 16 comparators", t[9], t[9] / 2);
    $display("%-40s %0d clocks for 2 image(s), %0d per image", "784-pixel image, 100 comparators", t[10], t[10] / 2);
    $display("%-40s %0d clocks for 2 image(s), %0d per image", "784-pixel image, 196 comparators", t[11], t[11] / 2);
    $display("%-40s %0d clocks for 2 image(s), %0d per image", "784-pixel image, 250 comparators", t[12], t[12] / 2);
    $display("%-40s %0d clocks for 2 image(s), %0d per image", "784-pixel image, 400 comparators", t[13], t[13] / 2);
    $display("%-40s %0d clocks for 2 image(s), %0d per image", "784-pixel image, 625 comparators", t[14], t[14] / 2);
    $display("%-40s %0d clocks for 2 image(s), %0d per image", "784-pixel image, 784 comparators", t[15], t[15] / 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    checks = 0;
    failures = 1;
    for (int i = 0; i < NCFG; i++) begin
      checks += c[i];
      failures += f[i];
    end
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
