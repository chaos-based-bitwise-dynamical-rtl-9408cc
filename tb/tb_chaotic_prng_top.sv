// tb_chaotic_prng_top: end-to-end test of the complete generator at its
// default parameters (32-bit words, M = 8, k_i in [9, 11]).
//
// Three runs, each after a reset: m = 8 gamma values (the main
// configuration), m = 3 and m = 1 (a single gamma, no switching). Each run
// tries a start with an empty buffer (must be ignored), writes the gamma
// values (with m = 8 one extra write, which must be refused), starts the
// generator and compares every output bit with the reference model of the
// whole generator. It checks the start-to-first-bit latency (3 clocks) and
// the rate of one bit per clock, and counts the mechanisms: refused write,
// ignored start, gamma switch, each partition length 9/10/11, reuse of
// gamma_1 after a full round, and a run without switching. A mechanism
// that never happens is a failure. A frequency (monobit) bound is checked
// on the m = 8 bits.
module tb_chaotic_prng_top;
  import prng_ref_pkg::*;

  localparam int NBITS8 = 20000;

  logic        clk = 0, rst_n = 0;
  logic        cfg_we = 0, start = 0;
  logic [31:0] cfg_gamma = '0, x0 = '0, lcg_seed = '0;
  logic        cfg_ready, random_bit, bit_valid, running, gamma_switch;
  int checks = 0, failures = 0;
  int n_refused = 0, n_ignored_start = 0, n_switch = 0, n_wrap = 0, n_noswitch_run = 0;
  int khist[16];

  chaotic_prng_top dut (.*);

  always #5 clk = ~clk;

  task automatic fail(string msg);
    failures++;
    if (failures < 15) $display("FAIL %s at %0t", msg, $time);
  endtask

  task automatic run_case(int m, int nbits, u32_t xinit, u32_t seed);
    gen_model mdl = new();
    u32_t g[$];
    int ones = 0, since = 0, lat = 0, switches = 0;
    rst_n = 0; cfg_we = 0; start = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    start = 1;
    @(posedge clk); #1 start = 0;
    repeat (3) @(posedge clk);
    #1;
    checks++;
    if (running || bit_valid) fail("start with empty buffer accepted");
    else n_ignored_start++;
    for (int i = 0; i < m + (m == 8); i++) begin
      cfg_we = 1;
      cfg_gamma = gamma_from_real(3.62 + 0.045 * i);
      #0;
      if (i >= 8) begin
        checks++;
        if (cfg_ready) fail("write into full buffer accepted");
        else n_refused++;
      end else begin
        checks++;
        if (!cfg_ready) fail("config write refused");
        g.push_back(cfg_gamma);
      end
      @(posedge clk); #1;
    end
    cfg_we = 0;
    x0 = xinit; lcg_seed = seed;
    start = 1;
    @(posedge clk); #1 start = 0;
    lat = 1;
    while (!bit_valid && lat < 10) begin
      @(posedge clk); #1 lat++;
    end
    checks++;
    if (lat != 3) fail($sformatf("start-to-first-bit latency %0d, expected 3", lat));
    mdl.prime(g, xinit, seed);
    for (int n = 0; n < nbits; n++) begin
      bit eb;
      eb = mdl.step();
      checks++;
      if (!bit_valid || random_bit !== eb) fail($sformatf("m=%0d bit %0d: got %b valid %b exp %b", m, n, random_bit, bit_valid, eb));
      ones += random_bit;
      since++;
      if (mdl.switched) begin
        khist[since]++;
        since = 0;
        switches++;
        if (mdl.gamma == g[0]) n_wrap++;
      end
      @(posedge clk); #1;
    end
    // gamma_switch is observed one cycle before its bit; compare totals instead
    n_switch += switches;
    if (m == 1) begin
      checks++;
      if (switches != 0) fail("switch with a single gamma");
      else n_noswitch_run++;
    end
    if (m == 8) begin
      checks++;
      if (ones < nbits / 2 - 2 * $sqrt(real'(nbits)) || ones > nbits / 2 + 2 * $sqrt(real'(nbits)))
        fail($sformatf("monobit: %0d ones in %0d bits", ones, nbits));
    end
    $display("m=%0d: %0d bits, %0d ones, %0d switches", m, nbits, ones, switches);
  endtask

  // gamma_switch must agree with the model's switch count
  int dut_switches = 0;
  always @(posedge clk) if (rst_n && gamma_switch) dut_switches++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    run_case(8, NBITS8, 32'h5A5A_1235, 32'hC0FF_EE01);
    run_case(3, 3000, 32'h2468_ACE1, 32'h0000_0007);
    run_case(1, 2000, 32'h7654_3211, 32'h1357_9BDF);
    checks++;
    if (dut_switches != n_switch) fail($sformatf("gamma_switch pulses %0d, model %0d", dut_switches, n_switch));
    for (int k = 9; k <= 11; k++) begin
      checks++;
      if (khist[k] == 0) fail($sformatf("partition length %0d never used", k));
    end
    for (int k = 0; k < 16; k++) begin
      if ((k < 9 || k > 11) && khist[k] != 0) begin
        checks++;
        fail($sformatf("partition length %0d used", k));
      end
    end
    checks++;
    if (n_refused == 0 || n_ignored_start == 0 || n_switch == 0 || n_wrap == 0 || n_noswitch_run == 0)
      fail("a mechanism never happened");
    $display("mechanisms: refused_write=%0d ignored_start=%0d switches=%0d gamma1_reuse=%0d k9=%0d k10=%0d k11=%0d single_gamma_runs=%0d",
             n_refused, n_ignored_start, n_switch, n_wrap, khist[9], khist[10], khist[11], n_noswitch_run);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
