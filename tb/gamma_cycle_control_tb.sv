// gamma_cycle_control_tb: generator and controller together, period 16.
//
// The three system tests of the relaxed gamma cycle on a final layer of 2
// columns of 2 neurons:
//   1. all neurons spike in the same clock: grst on the next clock edge;
//   2. one neuron per column, in different clocks: grst one clock after the
//      second column's spike, not after the first;
//   3. no spikes: grst every 16 clocks.
// Then random spikes on a 3-column, 2-neuron layer, with grst compared every
// clock with a model (clocks since the last reset, per-column spike memory).
// Counts shortened and full-length gamma cycles and checks grst_early.
module gamma_cycle_control_tb;
  localparam int PERIOD = 16;

  logic                clk = 0, rst = 1;
  logic [1:0][1:0]     columns = '0;
  logic [2:0][1:0]     columns3 = '0;
  logic                grst, grst_early, grst3, grst_early3;
  int                  checks = 0, failures = 0;
  int                  n_short = 0, n_full = 0;
  longint              cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  gamma_cycle_control #(.COLUMNS(2), .NEURONS(2), .PERIOD(PERIOD)) dut (
    .clk(clk), .rst(rst), .columns(columns), .grst(grst), .grst_early(grst_early));
  gamma_cycle_control #(.COLUMNS(3), .NEURONS(2), .PERIOD(PERIOD)) dut3 (
    .clk(clk), .rst(rst), .columns(columns3), .grst(grst3), .grst_early(grst_early3));

  task automatic expect_grst(input logic v, input string what);
    #1 checks++;
    if (grst !== v) begin failures++; $display("FAIL %s: grst=%b t=%0t", what, grst, $time); end
  endtask

  // Model of the 3-column instance.
  int       since3;
  bit       exp3, exp_early3;
  bit [2:0] seen3;
  always @(posedge clk) begin
    bit all;
    all = 1;
    for (int c = 0; c < 3; c++) if (!(seen3[c] || columns3[c] != 0)) all = 0;
    for (int c = 0; c < 3; c++) seen3[c] <= !(rst || exp3) && (seen3[c] || columns3[c] != 0);
    if (rst) begin
      since3 <= 0; exp3 <= 0; exp_early3 <= 0;
    end else if (exp3) begin
      exp3 <= 0; exp_early3 <= 0; since3 <= since3 + 1;
    end else if (since3 + 1 == PERIOD || all) begin
      exp3 <= 1; exp_early3 <= all; since3 <= 0;
      if (all) n_short++; else n_full++;
    end else begin
      since3 <= since3 + 1;
    end
  end

  always @(negedge clk) if (!rst) begin
    checks += 2;
    if (grst3 !== exp3) begin failures++; $display("FAIL random: grst=%b expected %b t=%0t", grst3, exp3, $time); end
    if (grst_early3 !== exp_early3) begin failures++; $display("FAIL random: grst_early=%b expected %b", grst_early3, exp_early3); end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    // test 1: all neurons spike together, 4 clocks into the cycle
    repeat (4) @(negedge clk);
    columns = 4'hf;
    expect_grst(0, "test 1 same clock");
    @(negedge clk) columns = '0;
    expect_grst(1, "test 1 next edge");
    checks++;
    if (grst_early !== 1) begin failures++; $display("FAIL test 1: grst_early low"); end
    // test 2: column 1 spikes, later column 0
    repeat (5) @(negedge clk);
    columns = 4'b1000;
    @(negedge clk) columns = '0;
    repeat (3) begin
      expect_grst(0, "test 2 after first column");
      @(negedge clk);
    end
    columns = 4'b0010;
    @(negedge clk) columns = '0;
    expect_grst(1, "test 2 after second column");
    // test 3: no spikes, full-length cycles
    for (int k = 0; k < 3; k++) begin
      for (int i = 1; i < PERIOD; i++) begin
        @(negedge clk);
        expect_grst(0, "test 3 inside the cycle");
      end
      @(negedge clk);
      expect_grst(1, "test 3 period end");
      checks++;
      if (grst_early !== 0) begin failures++; $display("FAIL test 3: grst_early high"); end
    end
    // random spikes on the 3-column layer
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      for (int c = 0; c < 3; c++)
        columns3[c] = ($urandom_range(0, 12) == 0) ? 2'(1) << $urandom_range(0, 1) : '0;
    end
    checks += 2;
    if (n_short == 0) begin failures++; $display("FAIL no shortened gamma cycle"); end
    if (n_full == 0)  begin failures++; $display("FAIL no full-length gamma cycle"); end
    $display("shortened=%0d full=%0d", n_short, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
