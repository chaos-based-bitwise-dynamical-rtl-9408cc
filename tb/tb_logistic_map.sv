// tb_logistic_map: checks the combinational logistic-map step against the
// wide-integer reference and against real arithmetic (error below 2^-29),
// on directed corner values and on random x and gamma in [3.57, 4).
module tb_logistic_map;
  import prng_ref_pkg::*;

  logic [31:0] x, gamma, x_next;
  int checks = 0, failures = 0;

  logistic_map dut (.x(x), .gamma(gamma), .x_next(x_next));

  task automatic check(u32_t xi, u32_t gi);
    real exact, got;
    x = xi; gamma = gi;
    #1;
    checks++;
    if (x_next !== map_ref(xi, gi)) begin
      failures++;
      $display("FAIL x=%h gamma=%h got=%h exp=%h", xi, gi, x_next, map_ref(xi, gi));
    end
    exact = (real'(gi) / 1073741824.0) * q32_to_real(xi) * (1.0 - q32_to_real(xi));
    got   = q32_to_real(x_next);
    checks++;
    if (exact - got > 1.0 / 536870912.0 || got - exact > 1.0 / 536870912.0 || got > exact + 1.0e-12) begin
      failures++;
      $display("FAIL real x=%h gamma=%h got=%f exact=%f", xi, gi, got, exact);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Directed: fixed point 0, x = 1/2, gamma near 4, smallest and largest x.
    check(32'h0, gamma_from_real(3.9));
    check(32'h8000_0000, gamma_from_real(3.9));
    check(32'h8000_0000, 32'hFFFF_FFFF);
    check(32'h0000_0001, gamma_from_real(3.99));
    check(32'hFFFF_FFFF, gamma_from_real(3.99));
    check(32'h4000_0000, 32'h4000_0000);  // gamma = 1, x = 1/4 -> 3/16
    checks++;
    if (x_next !== 32'h3000_0000) begin
      failures++;
      $display("FAIL gamma=1 x=1/4 got=%h", x_next);
    end
    for (int i = 0; i < 3000; i++)
      check($urandom, 32'hE47A_E147 + ($urandom % 32'h1B85_1EB9));  // 3.57 .. 4
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
