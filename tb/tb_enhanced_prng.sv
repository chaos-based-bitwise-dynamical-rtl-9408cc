// tb_enhanced_prng: the testbench plays the control block. It writes eight
// gamma values through config data, primes the generator (pop into the seed
// register, load x0), then steps every cycle and swaps gamma after a random
// number of steps in [9, 11] (pop + load + push of the seed register). x,
// gamma, random_bit and bit_valid are compared every cycle with a model
// built on the reference map and a queue; the return of gamma_1 after all
// eight values have been used is checked and counted.
module tb_enhanced_prng;
  import prng_ref_pkg::*;
  import prng_pkg::*;

  logic        clk = 0, rst_n = 0;
  prng_ctrl_t  ctrl;
  logic [31:0] config_data = '0, x0 = '0;
  logic        random_bit, bit_valid, buf_empty, buf_full;
  logic [31:0] gamma, x;
  int checks = 0, failures = 0;
  int n_wrap = 0, n_switch = 0;

  enhanced_prng dut (.*);

  always #5 clk = ~clk;

  u32_t gammas[8];
  u32_t q[$];
  u32_t m_x, m_gamma;

  task automatic fail(string msg);
    failures++;
    if (failures < 15) $display("FAIL %s at %0t", msg, $time);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int kleft;
    bit sw;
    ctrl = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    checks++;
    if (!buf_empty) fail("buffer not empty after reset");
    for (int i = 0; i < 8; i++) begin
      gammas[i]   = gamma_from_real(3.6 + 0.05 * i);
      ctrl        = '0;
      ctrl.write_en = 1;
      config_data = gammas[i];
      q.push_back(gammas[i]);
      @(posedge clk); #1;
    end
    checks++;
    if (!buf_full) fail("buffer not full after 8 writes");
    // prime
    ctrl = '0;
    ctrl.read_en = 1; ctrl.load_en = 1; ctrl.init_en = 1;
    x0 = 32'h1234_5679;
    @(posedge clk); #1;
    m_gamma = q.pop_front();
    m_x = x0;
    checks++;
    if (gamma !== m_gamma || x !== m_x) fail("prime");
    kleft = 9 + $urandom % 3;
    for (int c = 0; c < 3000; c++) begin
      ctrl = '0;
      ctrl.step_en = 1;
      sw = (kleft == 1);
      if (sw) begin
        ctrl.read_en = 1; ctrl.load_en = 1; ctrl.write_en = 1;
        kleft = 9 + $urandom % 3;
      end else kleft--;
      @(posedge clk); #1;
      m_x = map_ref(m_x, m_gamma);
      if (sw) begin
        q.push_back(m_gamma);
        m_gamma = q.pop_front();
        n_switch++;
        if (m_gamma == gammas[0]) n_wrap++;
      end
      checks++;
      if (x !== m_x || gamma !== m_gamma || random_bit !== m_x[0] || !bit_valid)
        fail($sformatf("cycle %0d x %h/%h gamma %h/%h", c, x, m_x, gamma, m_gamma));
    end
    checks++;
    if (n_wrap < 2) fail($sformatf("gamma_1 reused only %0d times", n_wrap));
    $display("switches=%0d wraps=%0d", n_switch, n_wrap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
