// partition_lcg: generator of the partition lengths k_i.
//
// A 32-bit linear congruential generator s' = LCG_A * s + LCG_C (mod 2^32)
// whose current state is mapped into [KMIN, KMAX] by scaling its upper 16
// bits: k = KMIN + floor(s[31:16] * (KMAX - KMIN + 1) / 2^16). The upper bits
// are used because the low bits of a power-of-two-modulus LCG cycle quickly.
// The range [9, 11] and the use of a simple LCG follow the generator's
// description; the constants (the Numerical Recipes pair), the seeding and
// the mapping are this design's choices.
//
// Interface: seed_load loads seed into the state; advance steps it (seed_load
// wins). k is combinational from the current state, so the value read in the
// cycle of an advance is the one before the step. Reset state is 0.
module partition_lcg #(
  parameter int unsigned KMIN  = prng_pkg::K_MIN,
  parameter int unsigned KMAX  = prng_pkg::K_MAX,
  parameter int unsigned KW    = prng_pkg::K_W,
  parameter logic [31:0] LCG_A = 32'd1664525,
  parameter logic [31:0] LCG_C = 32'd1013904223
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          seed_load,
  input  logic [31:0]   seed,
  input  logic          advance,
  output logic [KW-1:0] k
);

  localparam int unsigned SPAN = KMAX - KMIN + 1;

  logic [31:0] state;
  logic [47:0] scaled;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         state <= '0;
    else if (seed_load) state <= seed;
    else if (advance)   state <= LCG_A * state + LCG_C;
  end

  always_comb begin
    scaled = {32'd0, state[31:16]} * 48'(SPAN);
    k      = KW'(KMIN) + KW'(scaled[47:16]);
  end

endmodule
