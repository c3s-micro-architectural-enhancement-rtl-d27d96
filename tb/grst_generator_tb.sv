// grst_generator_tb: gamma reset generator, period 16.
//
// Phase 1 leaves grst_control low and checks that grst is a one-clock pulse
// every 16 clocks, the first 16 clocks after reset. Phase 2 raises
// grst_control for single clocks at chosen points, including the clock in
// which grst is high (must be ignored), and checks that grst follows on the
// next edge and that the period restarts from there. Phase 3 drives random
// grst_control. Throughout, grst is compared with a model that counts the
// clocks since the last gamma reset.
module grst_generator_tb;
  localparam int PERIOD = 16;

  logic clk = 0, rst = 1, grst_control = 0, grst;
  int   checks = 0, failures = 0;
  int   n_periodic = 0, n_early = 0, n_ignored = 0;

  always #5 clk = ~clk;

  grst_generator #(.PERIOD(PERIOD)) dut (.clk(clk), .rst(rst), .grst_control(grst_control), .grst(grst));

  // Model: clocks since the last gamma reset (reset counts as one).
  int  since;
  bit  exp_grst;
  always @(posedge clk) begin
    if (rst) begin
      since    <= 0;
      exp_grst <= 0;
    end else if (exp_grst) begin
      exp_grst <= 0;
      since    <= since + 1;
      if (grst_control) n_ignored++;
    end else if (since + 1 == PERIOD) begin
      exp_grst <= 1;
      since    <= 0;
      n_periodic++;
    end else if (grst_control) begin
      exp_grst <= 1;
      since    <= 0;
      n_early++;
    end else begin
      since    <= since + 1;
    end
  end

  always @(negedge clk) if (!rst) begin
    checks++;
    if (grst !== exp_grst) begin
      failures++;
      $display("FAIL t=%0t grst=%b expected %b", $time, grst, exp_grst);
    end
  end

  // Independent check of the period: distance between pulses with no control.
  longint cyc = 0, last_rise = -1;
  bit     ctl_seen = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (grst_control) ctl_seen <= 1;
    if (grst && !rst) begin
      if (last_rise >= 0 && !ctl_seen) begin
        checks++;
        if (cyc - last_rise != PERIOD) begin
          failures++;
          $display("FAIL gamma period %0d, expected %0d", cyc - last_rise, PERIOD);
        end
      end
      last_rise <= cyc;
      ctl_seen  <= 0;
    end
  end

  task automatic pulse_control_after(input int n);
    repeat (n) @(negedge clk);
    grst_control = 1;
    @(negedge clk);
    grst_control = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 0;
    // first grst 16 clocks after reset is released
    repeat (PERIOD) @(posedge clk);
    #1 checks++;
    if (grst !== 1) begin failures++; $display("FAIL first grst not 16 clocks after reset"); end
    repeat (5 * PERIOD) @(negedge clk);              // phase 1
    pulse_control_after(3);                          // phase 2: early end
    pulse_control_after(1);
    @(posedge grst);
    @(negedge clk);
    grst_control = 1;                                // high while grst is high
    @(negedge clk);
    grst_control = 0;
    repeat (2 * PERIOD) @(negedge clk);
    for (int i = 0; i < 400; i++) begin              // phase 3
      @(negedge clk);
      grst_control = ($urandom_range(0, 9) == 0);
    end
    @(negedge clk) grst_control = 0;
    repeat (2 * PERIOD) @(negedge clk);
    checks += 3;
    if (n_periodic < 5) begin failures++; $display("FAIL only %0d periodic grst", n_periodic); end
    if (n_early < 3)    begin failures++; $display("FAIL only %0d early grst", n_early); end
    if (n_ignored < 1)  begin failures++; $display("FAIL control during grst never tried"); end
    $display("periodic=%0d early=%0d ignored=%0d", n_periodic, n_early, n_ignored);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
