// pulse2edge_tb: pulse-to-edge flag.
//
// Random one-clock eout_only pulses and random gamma resets. greater must be 1
// in a clock with a pulse, and in any clock after a pulse until a clock in
// which grst (or reset) was high. Also checks the active-low reset.
module pulse2edge_tb;
  logic clk = 0, rstb = 0, grst = 0, eout_only = 0, greater;
  int   checks = 0, failures = 0, n_held = 0;
  bit   mem = 0;

  always #5 clk = ~clk;

  pulse2edge dut (.clk(clk), .rstb(rstb), .grst(grst), .eout_only(eout_only), .greater(greater));

  always @(posedge clk) mem <= rstb && !grst && (mem || eout_only);

  initial begin
    repeat (2) @(negedge clk);
    rstb = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      eout_only = ($urandom_range(0, 9) == 0);
      grst      = ($urandom_range(0, 15) == 0);
      if (i == 2000) rstb = 0;
      if (i == 2003) rstb = 1;
      #1 checks++;
      if (greater !== (mem || eout_only)) begin
        failures++;
        $display("FAIL t=%0t greater=%b expected %b", $time, greater, mem || eout_only);
      end
      if (mem && !eout_only) n_held++;
    end
    checks++;
    if (n_held == 0) begin failures++; $display("FAIL no held edge seen"); end
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
