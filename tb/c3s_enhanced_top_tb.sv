// c3s_enhanced_top_tb: the whole design at its default size, end to end.
//
// Sizes: 784-pixel images through 49 comparators, a 16-clock gamma cycle, a
// final layer of 676 columns x 12 neurons, and the STDP logic of the 1568
// synapses of one first-layer neuron. No parameter is overridden.
//
// The testbench plays the network around the design. A source sends random
// images, mostly back to back. For every gamma cycle it picks a plan for the
// final layer: all columns spike in one clock, columns spike one by one, no
// column spikes, or all but one column spikes; and a spike time (or none) for
// the first-layer neuron. It then checks:
//   - each encoded image against the pixels (above 127 = bit 7 set);
//   - that layer_in, loaded at a gamma reset, holds the newest encoded image;
//   - that grst comes one clock after the last column's first spike, or 16
//     clocks after the previous grst, whichever is first, and grst_early;
//   - in every grst clock, syn_inc / syn_dec of all 1568 synapses against the
//     STDP rule, with a time-0 input spike on every layer_in line that is 1.
// Each mechanism is counted and must occur: image encoded, image taken back
// to back, shortened and full gamma cycles, and the capture, search, backoff
// and no-spike updates. The minus case (output before input) cannot occur
// here, since layer_in spikes come at the start of the cycle; it is covered by
// stdp_casegen_tb.
module c3s_enhanced_top_tb;
  import c3s_pkg::*;
  localparam int IMG = IMG_PIXELS_DEF, C = COLUMNS_DEF, N = NEURONS_DEF;
  localparam int PERIOD = PERIOD_DEF, NSYN = 2 * IMG, NONE = -1;
  localparam int N_GAMMA = 40, N_IMAGES = 24;

  logic                  clk = 0, rst = 1;
  logic                  image_valid = 0, image_ready, next_img;
  logic [IMG*8-1:0]      image_in = '0;
  logic [NSYN-1:0]       layer_in, syn_inc, syn_dec;
  logic [C-1:0][N-1:0]   final_layer_out = '0;
  logic                  grst, grst_early, neuron_out = 0;
  stdp_brv_t [NSYN-1:0]  brv;
  int                    checks = 0, failures = 0;

  always #5 clk = ~clk;

  c3s_enhanced_top dut (
    .clk(clk), .rst(rst), .image_valid(image_valid), .image_in(image_in),
    .image_ready(image_ready), .next_Img_signal(next_img), .layer_in(layer_in),
    .final_layer_out(final_layer_out), .grst(grst), .grst_early(grst_early),
    .neuron_out(neuron_out), .brv(brv), .syn_inc(syn_inc), .syn_dec(syn_dec));

  int n_images = 0, n_b2b = 0, n_short = 0, n_full = 0;
  int n_capture = 0, n_search = 0, n_backoff = 0, n_inf = 0, n_dec = 0;

  task automatic fail(input string s);
    failures++;
    if (failures < 20) $display("FAIL t=%0t %s", $time, s);
  endtask

  // ---------------- image source and encoder checks ----------------
  logic [NSYN-1:0] exp_q[$];
  logic [NSYN-1:0] latest = '0;     // newest encoded image, as layer_in would hold it

  initial begin
    @(negedge rst);
    for (int i = 0; i < N_IMAGES; i++) begin
      logic [NSYN-1:0] e;
      @(negedge clk);
      if (i % 6 == 5) repeat ($urandom_range(1, 40)) @(negedge clk);
      for (int p = 0; p < IMG; p++) begin
        image_in[p*8 +: 8] = 8'($urandom);
        e[p]       = image_in[p*8+7];
        e[IMG + p] = !image_in[p*8+7];
      end
      image_valid = 1;
      @(posedge clk);
      while (!image_ready) @(posedge clk);
      if (dut.u_encoder.u_data_encoder.busy) n_b2b++;
      exp_q.push_back(e);
      #1 image_valid = 0;
    end
  end

  always @(negedge clk) if (!rst && next_img) begin
    logic [NSYN-1:0] e;
    e = exp_q.pop_front();
    checks++;
    if ({dut.u_encoder.image_neg_out, dut.u_encoder.image_pos_out} !== e) fail("encoded image wrong");
    latest = e;
    n_images++;
  end

  // ---------------- network model: gamma cycles ----------------
  int              j = 0;                 // clocks since the last grst clock
  int              exp_len;               // expected clock of the next grst
  int              spike_t[C];            // per column: clock of its spike, or NONE
  int              z_t;                   // first-layer neuron spike clock, or NONE
  bit              exp_early;
  logic [NSYN-1:0] load_exp;
  bit              check_load = 0;
  int              n_gamma = 0;

  task automatic plan_cycle();
    int mode, last;
    mode = $urandom_range(0, 3);
    last = 0;
    for (int c = 0; c < C; c++) begin
      case (mode)
        0: spike_t[c] = (c == 0) ? int'($urandom_range(1, 10)) : spike_t[0];
        1: spike_t[c] = int'($urandom_range(1, 12));
        2: spike_t[c] = NONE;
        default: spike_t[c] = (c == C / 2) ? NONE : int'($urandom_range(1, 12));
      endcase
    end
    exp_early = 1;
    for (int c = 0; c < C; c++) begin
      if (spike_t[c] == NONE) exp_early = 0;
      else if (spike_t[c] > last) last = spike_t[c];
    end
    exp_len = exp_early ? last + 1 : PERIOD;
    z_t = ($urandom_range(0, 2) == 0) ? NONE : int'($urandom_range(1, 14));
  endtask

  // STDP expectation for one synapse in the grst clock.
  task automatic check_stdp();
    bit z;
    z = neuron_out;
    for (int s = 0; s < NSYN; s++) brv[s] = stdp_brv_t'($urandom);
    #1;
    for (int s = 0; s < NSYN; s++) begin
      bit stab, e_inc, e_dec;
      stab = brv[s].fout_brv || brv[s].min_brv;
      e_inc = 0; e_dec = 0;
      if (layer_in[s] && z)  begin e_inc = stab && brv[s].capture_brv; if (e_inc) n_capture++; end
      else if (layer_in[s])  begin e_inc = stab && brv[s].search_brv;  if (e_inc) n_search++;  end
      else if (z)            begin e_dec = stab && brv[s].backoff_brv; if (e_dec) n_backoff++; end
      else                   begin e_inc = stab && brv[s].inf_brv;     if (e_inc) n_inf++;     end
      if (e_dec) n_dec++;
      checks++;
      if (syn_inc[s] !== e_inc || syn_dec[s] !== e_dec)
        fail($sformatf("synapse %0d inc=%b dec=%b expected %b %b", s, syn_inc[s], syn_dec[s], e_inc, e_dec));
    end
  endtask

  initial begin
    brv = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    @(posedge grst);                      // first gamma reset: start of the test
    @(negedge clk);
    plan_cycle();
    j = 0;
    load_exp = latest;
    check_load = 1;
    while (n_gamma < N_GAMMA) begin
      @(negedge clk);
      j++;
      if (check_load) begin
        checks++;
        if (layer_in !== load_exp) fail("layer_in is not the newest encoded image");
        check_load = 0;
      end
      if (grst) begin
        checks += 2;
        if (j != exp_len) fail($sformatf("grst after %0d clocks, expected %0d", j, exp_len));
        if (grst_early !== bit'(exp_early && exp_len < PERIOD)) fail("grst_early wrong");
        if (exp_early && exp_len < PERIOD) n_short++; else n_full++;
        final_layer_out = '0;
        check_stdp();
        neuron_out = 0;
        load_exp = latest;
        check_load = 1;
        n_gamma++;
        plan_cycle();
        j = 0;
      end else begin
        for (int c = 0; c < C; c++) final_layer_out[c] = (spike_t[c] == j) ? N'(1) << (c % N) : '0;
        neuron_out = (z_t != NONE && j >= z_t);
      end
    end
    checks += 9;
    if (n_images < 4)  fail("too few images encoded");
    if (n_b2b == 0)    fail("no image taken back to back");
    if (n_short == 0)  fail("no shortened gamma cycle");
    if (n_full == 0)   fail("no full-length gamma cycle");
    if (n_capture == 0) fail("no capture update");
    if (n_search == 0)  fail("no search update");
    if (n_backoff == 0) fail("no backoff update");
    if (n_inf == 0)     fail("no no-spike (+0.5u) update");
    if (n_dec == 0)     fail("no decrement");
    $display("images=%0d back_to_back=%0d short=%0d full=%0d capture=%0d search=%0d backoff=%0d inf=%0d",
             n_images, n_b2b, n_short, n_full, n_capture, n_search, n_backoff, n_inf);
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
