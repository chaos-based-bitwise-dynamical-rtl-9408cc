// logistic_map: one step of the digitized logistic map, x' = gamma * x * (1 - x).
//
// Purely combinational, so the generator can iterate once per clock. The
// state x is unsigned Q0.32 and gamma is unsigned Q2.30 (a choice of this
// design; only the 32-bit word length comes from the generator's
// description). (1 - x) is formed exactly on W+1 bits, x*(1 - x) is
// truncated back to Q0.W, and the product with gamma is truncated to Q0.W.
// For gamma <= 4 the exact result is below 1, so the result never overflows;
// for a larger gamma the upper bits of the product are simply dropped.
//
// Interface: x, gamma in; x_next out. No clock, no latency.
module logistic_map #(
  parameter int unsigned W          = prng_pkg::WORD_W,
  parameter int unsigned GAMMA_FRAC = W - 2
) (
  input  logic [W-1:0] x,
  input  logic [W-1:0] gamma,
  output logic [W-1:0] x_next
);

  logic [W:0]       one_minus_x;  // 1 - x, Q1.W
  logic [2*W:0]     xx_full;      // x * (1 - x), Q1.2W
  logic [W-1:0]     xx;           // x * (1 - x) truncated to Q0.W (value <= 1/4)
  logic [2*W-1:0]   gx_full;      // gamma * xx, Q2.(W+GAMMA_FRAC)

  always_comb begin
    one_minus_x = {1'b1, {W{1'b0}}} - {1'b0, x};
    xx_full     = {{W{1'b0}}, x} * {{W{1'b0}}, one_minus_x};
    xx          = xx_full[2*W-1:W];
    gx_full     = {{W{1'b0}}, gamma} * {{W{1'b0}}, xx};
    x_next      = gx_full[GAMMA_FRAC +: W];
  end

endmodule
