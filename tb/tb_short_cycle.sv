// tb_short_cycle: shows the effect the parameter switching is there for.
//
// Run 1 writes a single gamma (3.9), so the generator is the plain 32-bit
// logistic map. Its state must enter a cycle: the testbench finds the tail
// and period from the reference model, then checks that the generator's
// output bits repeat with exactly that period once the cycle is reached,
// and that its state takes no more distinct values than tail + period.
// Run 2 writes eight gamma values in [3.57, 4) (the main configuration)
// from the same x0; over the same number of steps its state must take
// almost only new values (at least 95 % distinct), i.e. no short cycle.
// Every output bit of both runs is compared with the reference model.
module tb_short_cycle;
  import prng_ref_pkg::*;

  localparam int NSTEPS = 200_000;

  logic        clk = 0, rst_n = 0;
  logic        cfg_we = 0, start = 0;
  logic [31:0] cfg_gamma = '0, x0 = '0, lcg_seed = '0;
  logic        cfg_ready, random_bit, bit_valid, running, gamma_switch;
  int checks = 0, failures = 0;

  chaotic_prng_top dut (.*);

  always #5 clk = ~clk;

  task automatic fail(string msg);
    failures++;
    if (failures < 15) $display("FAIL %s", msg);
  endtask

  // Runs the generator for NSTEPS bits; returns the number of distinct
  // states seen and the bit stream.
  task automatic run(input u32_t gammas[$], input u32_t xinit, output int distinct,
                     ref bit bits[]);
    gen_model mdl;
    bit seen[u32_t];
    int mism;
    mdl  = new();
    mism = 0;
    rst_n = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    foreach (gammas[i]) begin
      cfg_we = 1; cfg_gamma = gammas[i];
      @(posedge clk); #1;
    end
    cfg_we = 0; x0 = xinit; lcg_seed = 32'h0BAD_5EED;
    start = 1;
    @(posedge clk); #1 start = 0;
    while (!bit_valid) begin
      @(posedge clk); #1;
    end
    mdl.prime(gammas, xinit, lcg_seed);
    bits = new[NSTEPS];
    for (int n = 0; n < NSTEPS; n++) begin
      bit eb;
      eb = mdl.step();
      if (random_bit !== eb || !bit_valid) mism++;
      bits[n] = random_bit;
      seen[dut.u_prng.x] = 1'b1;
      @(posedge clk); #1;
    end
    checks++;
    if (mism != 0) fail($sformatf("%0d bits differ from the model", mism));
    distinct = seen.num();
  endtask

  initial begin
    repeat (3 * NSTEPS) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    u32_t one[$], eight[$];
    u32_t xr, xinit;
    int   first[u32_t];
    int   tail, period, d1, d8, bad;
    bit   bits1[], bits8[];

    xinit = 32'h7654_3211;
    one.push_back(gamma_from_real(3.9));
    for (int i = 0; i < 8; i++) eight.push_back(gamma_from_real(3.6 + 0.05 * i));

    // tail and period of the single-gamma map, from the reference model
    xr = xinit;
    tail = -1;
    for (int n = 0; n < NSTEPS; n++) begin
      if (first.exists(xr)) begin
        tail = first[xr]; period = n - first[xr];
        break;
      end
      first[xr] = n;
      xr = map_ref(xr, one[0]);
    end
    checks++;
    if (tail < 0) fail("reference map did not cycle within the run");
    $display("single gamma: tail %0d, period %0d", tail, period);

    run(one, xinit, d1, bits1);
    // bit n is LSB(x_{n+1}); x is periodic from index tail on
    bad = 0;
    for (int n = tail; n + period < NSTEPS; n++)
      if (bits1[n] != bits1[n + period]) bad++;
    checks++;
    if (bad != 0) fail($sformatf("single-gamma output not periodic with %0d (%0d)", period, bad));
    checks++;
    if (d1 > tail + period + 1) fail($sformatf("single gamma: %0d distinct states", d1));

    run(eight, xinit, d8, bits8);
    checks++;
    if (d8 < NSTEPS * 95 / 100) fail($sformatf("eight gammas: only %0d distinct states", d8));
    $display("distinct states in %0d steps: one gamma %0d, eight gammas %0d", NSTEPS, d1, d8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
