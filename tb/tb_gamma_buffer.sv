// tb_gamma_buffer: random pushes (from config data or from the seed side of
// the input mux) and pops, checked every cycle against a queue model: head
// value, count, empty and full. Simultaneous push and pop on a full buffer,
// the circular reuse pattern, is forced to happen and counted.
module tb_gamma_buffer;

  localparam int M = 8;

  logic        clk = 0, rst_n = 0;
  logic        write_en = 0, wr_sel_seed = 0, read_en = 0;
  logic [31:0] config_data = '0, seed_gamma = '0, rd_data;
  logic [3:0]  count;
  logic        empty, full;
  int checks = 0, failures = 0;
  int n_full_rw = 0, n_seed_wr = 0, n_full = 0;

  gamma_buffer dut (.*);

  always #5 clk = ~clk;

  logic [31:0] q[$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int cyc = 0; cyc < 6000; cyc++) begin
      // Choose a legal operation (the buffer asserts on illegal ones).
      read_en     = (q.size() > 0) && (($urandom % 3) == 0 || q.size() == M && cyc % 2 == 0);
      write_en    = ($urandom % 2) == 0 && (q.size() < M || read_en);
      wr_sel_seed = 1'($urandom % 2);
      config_data = $urandom;
      seed_gamma  = $urandom;
      if (write_en && read_en && q.size() == M) n_full_rw++;
      if (write_en && wr_sel_seed) n_seed_wr++;
      @(posedge clk);
      if (read_en) void'(q.pop_front());
      if (write_en) q.push_back(wr_sel_seed ? seed_gamma : config_data);
      #1;
      checks++;
      if (count !== 4'(q.size()) || empty !== (q.size() == 0) || full !== (q.size() == M) ||
          (q.size() > 0 && rd_data !== q[0])) begin
        failures++;
        if (failures < 10)
          $display("FAIL cyc %0d: count %0d/%0d head %h/%h", cyc, count, q.size(), rd_data,
                   q.size() > 0 ? q[0] : 32'h0);
      end
      if (full) n_full++;
    end
    checks++;
    if (n_full_rw == 0 || n_seed_wr == 0 || n_full == 0) begin
      failures++;
      $display("FAIL: coverage full_rw=%0d seed_wr=%0d full=%0d", n_full_rw, n_seed_wr, n_full);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
