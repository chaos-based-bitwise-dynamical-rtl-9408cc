// prng_pkg: types and constants shared by the chaotic bitwise dynamical PRNG.
//
// Number formats (this design's choice; the generator only fixes 32-bit words):
//   x      unsigned Q0.32, the logistic-map state in [0, 1)
//   gamma  unsigned Q2.30 (Q2.(W-2) in general), the chaotic parameter,
//          meant to lie in [3.57, 4)
// The control bundle prng_ctrl_t carries the enables that the control block
// drives into the enhanced PRNG (buffer write/read, seed load, state
// initialisation and map step).
package prng_pkg;

  localparam int unsigned WORD_W     = 32;  // word length of gamma and x
  localparam int unsigned NUM_GAMMA  = 8;   // m, number of gamma values
  localparam int unsigned K_MIN      = 9;   // lower bound of k_i
  localparam int unsigned K_MAX      = 11;  // upper bound of k_i
  localparam int unsigned K_W        = 4;   // width of a k_i value

  typedef logic [WORD_W-1:0] word_t;

  typedef struct packed {
    logic write_en;     // push into the gamma buffer
    logic read_en;      // pop the gamma buffer head
    logic load_en;      // seed register takes the buffer head
    logic init_en;      // state register takes x0
    logic step_en;      // state register takes f(x, gamma)
  } prng_ctrl_t;

endpackage
