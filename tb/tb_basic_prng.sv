// tb_basic_prng: drives the seed/state registers of the basic PRNG with
// random load, init and step enables and compares gamma, x, random_bit and
// bit_valid every cycle with a model built on the reference map. It also
// checks that a step and a load at the same edge still use the old gamma.
module tb_basic_prng;
  import prng_ref_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        load_en = 0, init_en = 0, step_en = 0;
  logic [31:0] gamma_in = '0, x0 = '0;
  logic [31:0] gamma, x;
  logic        random_bit, bit_valid;
  int checks = 0, failures = 0;
  int n_load_step = 0;

  basic_prng dut (.*);

  always #5 clk = ~clk;

  u32_t m_gamma, m_x;
  bit   m_valid;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    m_gamma = 0; m_x = 0; m_valid = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      // drive inputs away from the edge
      load_en  = ($urandom % 8) == 0;
      init_en  = ($urandom % 64) == 0 || cyc == 0;
      step_en  = ($urandom % 4) != 0;
      gamma_in = 32'hE47A_E147 + ($urandom % 32'h1B85_1EB9);
      x0       = $urandom | 32'h1;
      if (load_en && step_en && !init_en) n_load_step++;
      @(posedge clk);
      // model update with the values sampled at this edge
      if (init_en)      m_x = x0;
      else if (step_en) m_x = map_ref(m_x, m_gamma);
      m_valid = step_en && !init_en;
      if (load_en) m_gamma = gamma_in;
      #1;
      checks++;
      if (gamma !== m_gamma || x !== m_x || bit_valid !== m_valid || random_bit !== m_x[0]) begin
        failures++;
        if (failures < 10)
          $display("FAIL cyc %0d: gamma %h/%h x %h/%h valid %b/%b bit %b", cyc,
                   gamma, m_gamma, x, m_x, bit_valid, m_valid, random_bit);
      end
    end
    checks++;
    if (n_load_step == 0) begin
      failures++;
      $display("FAIL: no simultaneous load and step");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
