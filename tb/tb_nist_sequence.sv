// tb_nist_sequence: generates one full-length statistical-test sequence of
// 10^6 bits from the complete generator in its main configuration (eight
// gamma values in [3.57, 4), k_i in [9, 11]) and checks every bit against
// the reference model. On the sequence it evaluates two of the standard
// randomness tests at significance 0.01: the frequency (monobit) test,
// which passes when |S_n| / sqrt(n) <= 2.5758, and the runs test, which
// passes when |V_n - 2 n pi (1 - pi)| / (2 sqrt(2n) pi (1 - pi)) <= 1.8214
// (the points where erfc(x / sqrt 2) and erfc(x) fall to 0.01).
module tb_nist_sequence;
  import prng_ref_pkg::*;

  localparam int NBITS = 1_000_000;

  logic        clk = 0, rst_n = 0;
  logic        cfg_we = 0, start = 0;
  logic [31:0] cfg_gamma = '0, x0 = '0, lcg_seed = '0;
  logic        cfg_ready, random_bit, bit_valid, running, gamma_switch;
  int checks = 0, failures = 0;

  chaotic_prng_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (NBITS + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    gen_model mdl;
    u32_t g[$];
    longint ones, runs, mism;
    bit prev;
    real pi, s_obs, r_obs;
    mdl = new();
    ones = 0; runs = 1; mism = 0; prev = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 8; i++) begin
      cfg_we = 1;
      cfg_gamma = gamma_from_real(3.61 + 0.051 * i);
      g.push_back(cfg_gamma);
      @(posedge clk); #1;
    end
    cfg_we = 0;
    x0 = 32'h3C6E_F373; lcg_seed = 32'h9E37_79B9;
    start = 1;
    @(posedge clk); #1 start = 0;
    while (!bit_valid) begin
      @(posedge clk); #1;
    end
    mdl.prime(g, x0, lcg_seed);
    for (int n = 0; n < NBITS; n++) begin
      bit eb;
      eb = mdl.step();
      if (!bit_valid || random_bit !== eb) begin
        mism++;
        if (mism < 10) $display("FAIL bit %0d: got %b exp %b", n, random_bit, eb);
      end
      ones += random_bit;
      if (n > 0 && random_bit != prev) runs++;
      prev = random_bit;
      @(posedge clk); #1;
    end
    checks++;
    if (mism != 0) failures++;
    s_obs = (2.0 * ones - NBITS) / $sqrt(real'(NBITS));
    if (s_obs < 0) s_obs = -s_obs;
    pi = real'(ones) / NBITS;
    r_obs = (real'(runs) - 2.0 * NBITS * pi * (1.0 - pi)) / (2.0 * $sqrt(2.0 * NBITS) * pi * (1.0 - pi));
    if (r_obs < 0) r_obs = -r_obs;
    $display("ones=%0d runs=%0d monobit_stat=%f runs_stat=%f", ones, runs, s_obs, r_obs);
    checks++;
    if (s_obs > 2.5758) begin
      failures++;
      $display("FAIL frequency test");
    end
    checks++;
    if (r_obs > 1.8214) begin
      failures++;
      $display("FAIL runs test");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
