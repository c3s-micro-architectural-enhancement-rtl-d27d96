// stdp_casegen_tb: STDP case classification over whole gamma cycles.
//
// Each gamma cycle is 16 clocks long and ends with a grst clock. The input
// spike time x and the output spike time z are each either a clock of the
// cycle or "none" (infinity); ein and eout rise at their spike times and stay
// high until grst, as edge-coded spikes do. In the grst clock the case vector
// must be one-hot with the bit given by the rule:
//   both spiked, x <= z -> capture (bit 0)   both spiked, x > z -> minus (1)
//   input only          -> search  (bit 2)   output only        -> backoff (3)
//   neither             -> inf     (bit 4)
// Directed cycles cover equal and adjacent times; then random cycles.
module stdp_casegen_tb;
  import c3s_pkg::*;
  localparam int L = 16, NONE = -1;

  logic       clk = 0, rstb = 0, grst = 0, ein = 0, eout = 0;
  logic [4:0] stdp_cases;
  int         checks = 0, failures = 0;
  int         hits[5] = '{default: 0};

  always #5 clk = ~clk;

  stdp_casegen dut (.clk(clk), .rstb(rstb), .grst(grst), .ein(ein), .eout(eout), .stdp_cases(stdp_cases));

  function automatic int rule(input int x, input int z);
    if (x != NONE && z != NONE) return (x <= z) ? CASE_CAPTURE : CASE_MINUS;
    if (x != NONE)              return CASE_SEARCH;
    if (z != NONE)              return CASE_BACKOFF;
    return CASE_INF;
  endfunction

  task automatic gamma_cycle(input int x, input int z);
    for (int t = 0; t < L - 1; t++) begin
      @(negedge clk);
      grst = 0;
      if (t == x) ein = 1;
      if (t == z) eout = 1;
    end
    @(negedge clk);
    grst = 1;                       // last clock of the cycle: sample the case
    #1 checks++;
    if (stdp_cases !== (5'b1 << rule(x, z))) begin
      failures++;
      $display("FAIL x=%0d z=%0d cases=%b expected bit %0d", x, z, stdp_cases, rule(x, z));
    end
    hits[rule(x, z)]++;
    @(posedge clk);
    #1 ein = 0;
    eout = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rstb = 1;
    gamma_cycle(3, 3);       // same clock: capture
    gamma_cycle(3, 4);       // input first: capture
    gamma_cycle(4, 3);       // output first: minus
    gamma_cycle(0, 14);
    gamma_cycle(14, 0);
    gamma_cycle(5, NONE);    // search
    gamma_cycle(NONE, 5);    // backoff
    gamma_cycle(NONE, NONE); // neither
    for (int i = 0; i < 400; i++)
      gamma_cycle(($urandom_range(0, 3) == 0) ? NONE : int'($urandom_range(0, L - 2)),
                  ($urandom_range(0, 3) == 0) ? NONE : int'($urandom_range(0, L - 2)));
    for (int k = 0; k < 5; k++) begin
      checks++;
      if (hits[k] == 0) begin failures++; $display("FAIL case %0d never produced", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
