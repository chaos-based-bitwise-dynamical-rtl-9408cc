// chaotic_prng_top: complete chaos-based bitwise dynamical PRNG.
//
// The enhanced PRNG (logistic map with a circular buffer of gamma values)
// and the control block that sequences it. Usage: after reset, write the
// gamma values (Q2.30, nominally in [3.57, 4)) one per cycle with cfg_we
// while cfg_ready is high, up to M of them; then pulse start with x0
// (Q0.32, not 0) and lcg_seed valid. Two cycles later running is high, and
// from the cycle after that random_bit carries one new bit per clock,
// flagged by bit_valid, until reset. gamma_switch marks the edges at which
// the chaotic parameter changes (after k_i in [KMIN, KMAX] iterations).
//
// Parameters default to the generator's main configuration: 32-bit words,
// m = M = 8 gamma values, k_i in [9, 11]. The host handshake is this
// design's own.
module chaotic_prng_top
  import prng_pkg::*;
#(
  parameter int unsigned W    = prng_pkg::WORD_W,
  parameter int unsigned M    = prng_pkg::NUM_GAMMA,
  parameter int unsigned KMIN = prng_pkg::K_MIN,
  parameter int unsigned KMAX = prng_pkg::K_MAX,
  parameter int unsigned GAMMA_FRAC = W - 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         cfg_we,
  input  logic [W-1:0] cfg_gamma,
  output logic         cfg_ready,
  input  logic         start,
  input  logic [W-1:0] x0,
  input  logic [31:0]  lcg_seed,
  output logic         random_bit,
  output logic         bit_valid,
  output logic         running,
  output logic         gamma_switch
);

  prng_ctrl_t   ctrl;
  logic         buf_empty, buf_full;
  logic [W-1:0] gamma, x;
  logic [K_W-1:0] k_cur;

  prng_control #(.KMIN(KMIN), .KMAX(KMAX), .KW(K_W)) u_control (
    .clk          (clk),
    .rst_n        (rst_n),
    .cfg_we       (cfg_we),
    .cfg_ready    (cfg_ready),
    .start        (start),
    .lcg_seed     (lcg_seed),
    .buf_empty    (buf_empty),
    .buf_full     (buf_full),
    .ctrl         (ctrl),
    .running      (running),
    .gamma_switch (gamma_switch),
    .k_cur        (k_cur)
  );

  enhanced_prng #(.W(W), .M(M), .GAMMA_FRAC(GAMMA_FRAC)) u_prng (
    .clk         (clk),
    .rst_n       (rst_n),
    .ctrl        (ctrl),
    .config_data (cfg_gamma),
    .x0          (x0),
    .random_bit  (random_bit),
    .bit_valid   (bit_valid),
    .gamma       (gamma),
    .x           (x),
    .buf_empty   (buf_empty),
    .buf_full    (buf_full)
  );

endmodule
