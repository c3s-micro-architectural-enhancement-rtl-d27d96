// spike_checker_tb: one column's spike checker, 12 neurons.
//
// Random single-clock neuron spikes and random clears. The expected output is
// worked out from the history: spiked must be 1 if a neuron spikes in this
// clock, or if one spiked in an earlier clock with no clear in that clock or
// since. Also checks directly that a spike is held for many clocks and that a
// clear drops it.
module spike_checker_tb;
  localparam int N = 12;

  logic         clk = 0, clear = 1;
  logic [N-1:0] neuron_out = '0;
  logic         spiked;
  int           checks = 0, failures = 0;
  bit           held = 0;    // a spike is remembered from an earlier clock

  always #5 clk = ~clk;

  spike_checker #(.NEURONS(N)) dut (.clk(clk), .clear(clear), .neuron_out(neuron_out), .spiked(spiked));

  always @(posedge clk) held <= !clear && (held || (neuron_out != 0));

  task automatic check(input string what);
    #1 checks++;
    if (spiked !== (held || (neuron_out != 0))) begin
      failures++;
      $display("FAIL %s t=%0t spiked=%b held=%b in=%h clear=%b", what, $time, spiked, held, neuron_out, clear);
    end
  endtask

  initial begin
    @(negedge clk);
    clear = 0;
    check("after clear");
    // directed: one neuron spikes once and must be held
    neuron_out = 12'h400;
    check("spike");
    @(negedge clk) neuron_out = '0;
    for (int i = 0; i < 20; i++) begin
      check("hold");
      if (spiked !== 1) begin failures++; $display("FAIL spike not held"); end
      @(negedge clk);
    end
    clear = 1;
    @(negedge clk) clear = 0;
    check("cleared");
    if (spiked !== 0) begin failures++; $display("FAIL clear did not drop spiked"); end
    // random
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      neuron_out = ($urandom_range(0, 7) == 0) ? N'(1) << $urandom_range(0, N - 1) : '0;
      clear      = ($urandom_range(0, 15) == 0);
      check("random");
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
