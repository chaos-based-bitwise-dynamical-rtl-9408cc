// tb_prng_control: runs the control block against a modelled buffer fill
// level. It checks that writes are accepted only while the buffer has room,
// that start is ignored with an empty buffer, that the PRIME cycle pops the
// first gamma and loads x0, and that during generation the map steps every
// cycle and the gamma is swapped (pop + load + push of the seed) exactly
// when the reference partition model says so, for m = 8, 3 and 1.
module tb_prng_control;
  import prng_ref_pkg::*;
  import prng_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        cfg_we = 0, start = 0;
  logic [31:0] lcg_seed = '0;
  logic        buf_empty, buf_full, cfg_ready, running, gamma_switch;
  prng_ctrl_t  ctrl;
  logic [3:0]  k_cur;
  int checks = 0, failures = 0;
  int fill = 0;
  int n_switch = 0, n_full_block = 0, n_empty_start = 0;

  assign buf_empty = (fill == 0);
  assign buf_full  = (fill == 8);

  prng_control dut (.*);

  always #5 clk = ~clk;

  // Buffer fill level as the real buffer would track it.
  always @(posedge clk) begin
    if (rst_n) fill <= fill + int'(ctrl.write_en) - int'(ctrl.read_en);
  end

  task automatic fail(string msg);
    failures++;
    if (failures < 15) $display("FAIL %s at %0t", msg, $time);
  endtask

  task automatic do_reset();
    rst_n = 0; cfg_we = 0; start = 0;
    @(posedge clk); #1 fill = 0;
    @(posedge clk); #1 rst_n = 1;
  endtask

  task automatic run_case(int m, int cycles);
    gen_model mdl = new();
    u32_t g[$];
    do_reset();
    // start with nothing stored must be ignored
    start = 1;
    @(posedge clk); #1 start = 0;
    checks++;
    if (running || ctrl.read_en) fail("start accepted with empty buffer");
    else n_empty_start++;
    // configuration writes, one more than fits when m = 8
    for (int i = 0; i < m + (m == 8); i++) begin
      cfg_we = 1;
      #0;
      checks++;
      if (i >= 8) begin
        if (cfg_ready || ctrl.write_en) fail("write accepted into full buffer");
        else n_full_block++;
      end else if (!cfg_ready || !ctrl.write_en || ctrl.load_en) fail("config write refused");
      if (i < 8) g.push_back(u32_t'(i));
      @(posedge clk); #1;
    end
    cfg_we = 0;
    lcg_seed = $urandom;
    start = 1;
    @(posedge clk); #1 start = 0;
    // PRIME cycle
    checks++;
    if (!(ctrl.read_en && ctrl.load_en && ctrl.init_en && !ctrl.step_en && !ctrl.write_en))
      fail("PRIME controls");
    mdl.prime(g, 32'h1, lcg_seed);
    @(posedge clk); #1;
    for (int c = 0; c < cycles; c++) begin
      void'(mdl.step());
      checks++;
      if (!running || !ctrl.step_en || ctrl.init_en) fail("not stepping in RUN");
      checks++;
      if (gamma_switch !== mdl.switched ||
          ctrl.read_en !== mdl.switched || ctrl.load_en !== mdl.switched ||
          ctrl.write_en !== mdl.switched || (mdl.switched && !ctrl.load_en))
        fail($sformatf("switch mismatch m=%0d cycle %0d: dut %b model %b", m, c, gamma_switch, mdl.switched));
      if (gamma_switch) n_switch++;
      checks++;
      if (k_cur < 9 || k_cur > 11) fail("k_cur out of range");
      @(posedge clk); #1;
      checks++;
      if (fill != (m > 8 ? 8 : m) - 1) fail("fill level changed during RUN");
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    run_case(8, 600);
    run_case(3, 200);
    run_case(1, 100);
    checks++;
    if (n_switch == 0 || n_full_block == 0 || n_empty_start == 0) begin
      failures++;
      $display("FAIL coverage switch=%0d full_block=%0d empty_start=%0d",
               n_switch, n_full_block, n_empty_start);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
