// tb_partition_lcg: loads seeds, advances the LCG at random and compares k
// with the reference LCG every cycle; checks that k stays in [9, 11], that
// every value in that range occurs, and that a load overrides an advance.
module tb_partition_lcg;
  import prng_ref_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        seed_load = 0, advance = 0;
  logic [31:0] seed = '0;
  logic [3:0]  k;
  int checks = 0, failures = 0;
  int hist[16];

  partition_lcg dut (.*);

  always #5 clk = ~clk;

  u32_t m_s;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    m_s = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int cyc = 0; cyc < 6000; cyc++) begin
      seed_load = (cyc % 1000) == 0;
      advance   = ($urandom % 4) != 0;
      seed      = $urandom;
      @(posedge clk);
      if (seed_load)    m_s = seed;
      else if (advance) m_s = lcg_next(m_s);
      #1;
      checks++;
      if (k !== 4'(k_of(m_s)) || k < 9 || k > 11) begin
        failures++;
        if (failures < 10) $display("FAIL cyc %0d: k=%0d exp %0d", cyc, k, k_of(m_s));
      end
      hist[k]++;
    end
    for (int v = 9; v <= 11; v++) begin
      checks++;
      if (hist[v] < 1000) begin
        failures++;
        $display("FAIL: k=%0d occurred %0d times", v, hist[v]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
