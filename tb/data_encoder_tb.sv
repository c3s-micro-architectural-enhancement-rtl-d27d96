// data_encoder_tb: data_encoder at the published size (784 pixels, 49 per
// clock, 16 samples) and at a size where the comparator count does not divide
// the image (10 pixels, 4 per clock, short last sample), each through
// data_encoder_harness.
module data_encoder_tb;
  logic clk = 0, rst = 1;
  int   c0, f0, c1, f1;
  logic d0, d1;
  int   checks, failures;

  always #5 clk = ~clk;

  data_encoder_harness #(.IMG_PIXELS(784), .NCMP(49), .N_IMAGES(8))  h_full (.clk, .rst, .checks(c0), .failures(f0), .done(d0));
  data_encoder_harness #(.IMG_PIXELS(10),  .NCMP(4),  .N_IMAGES(20)) h_odd  (.clk, .rst, .checks(c1), .failures(f1), .done(d1));

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    @(posedge clk);
    wait (d0 && d1);
    checks = c0 + c1;
    failures = f0 + f1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1 + 1);
    $finish;
  end
endmodule
