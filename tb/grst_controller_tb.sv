// grst_controller_tb: early-reset request from the final layer's spikes.
//
// A small controller (4 columns of 3 neurons) gets random neuron spikes and
// random gamma resets; grst_control is compared every clock with a model that
// keeps, per column, whether the column has spiked since the last reset. A
// controller at the default size (676 columns of 12 neurons) is then taken
// through one gamma cycle in which columns spike one at a time: grst_control
// must stay low until the last column spikes.
module grst_controller_tb;
  localparam int C = 4, N = 3;
  localparam int CD = 676, ND = 12;

  logic                clk = 0, rst = 1, grst = 0;
  logic [C-1:0][N-1:0] columns = '0;
  logic                grst_control;
  logic [CD-1:0][ND-1:0] columns_d = '0;
  logic                grst_control_d;
  int                  checks = 0, failures = 0, n_all = 0;
  logic [C-1:0]        seen = '0;      // model: column spiked since last reset

  always #5 clk = ~clk;

  grst_controller #(.COLUMNS(C), .NEURONS(N)) dut (
    .clk(clk), .rst(rst), .grst(grst), .columns(columns), .grst_control(grst_control));
  grst_controller dut_full (
    .clk(clk), .rst(rst), .grst(grst), .columns(columns_d), .grst_control(grst_control_d));

  always @(posedge clk)
    for (int c = 0; c < C; c++)
      seen[c] <= !(rst || grst) && (seen[c] || (columns[c] != 0));

  function automatic bit all_spiked();
    for (int c = 0; c < C; c++) if (!(seen[c] || columns[c] != 0)) return 0;
    return 1;
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      for (int c = 0; c < C; c++)
        columns[c] = ($urandom_range(0, 5) == 0) ? N'(1) << $urandom_range(0, N - 1) : '0;
      grst = ($urandom_range(0, 7) == 0);
      #1 checks++;
      if (grst_control !== all_spiked()) begin
        failures++;
        $display("FAIL t=%0t grst_control=%b expected %b", $time, grst_control, all_spiked());
      end
      if (grst_control) n_all++;
    end
    // default size: clear, then spike columns one at a time
    @(negedge clk) begin grst = 1; columns = '0; end
    @(negedge clk) grst = 0;
    for (int c = 0; c < CD; c++) begin
      columns_d = '0;
      columns_d[c][c % ND] = 1'b1;
      #1 checks++;
      if (grst_control_d !== (c == CD - 1)) begin
        failures++;
        $display("FAIL full size: grst_control=%b after column %0d", grst_control_d, c);
      end
      @(negedge clk);
    end
    columns_d = '0;
    #1 checks++;
    if (grst_control_d !== 1) begin failures++; $display("FAIL full size: spikes not remembered"); end
    @(negedge clk) grst = 1;
    @(negedge clk) grst = 0;
    #1 checks++;
    if (grst_control_d !== 0) begin failures++; $display("FAIL full size: grst did not clear"); end
    checks++;
    if (n_all == 0) begin failures++; $display("FAIL random test never saw all columns spike"); end
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
