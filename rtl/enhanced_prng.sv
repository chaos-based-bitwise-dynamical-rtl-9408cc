// enhanced_prng: the logistic-map bit generator with its circular buffer of
// chaotic parameters.
//
// The basic PRNG (seed register, feedback function, state register, output
// function) is joined to the gamma buffer as in the generator's block
// diagram: the buffer head feeds the seed register's load mux, and the seed
// register feeds back into the buffer's input mux next to the external
// config data, so that a gamma leaving the seed register can be stored again.
// As in that diagram, the load enable also selects the buffer's input mux:
// a push made together with a seed load stores the outgoing seed gamma, any
// other push stores config_data. All sequencing comes from outside through
// ctrl (prng_ctrl_t): write_en, read_en, load_en and config_data are the
// inputs named in the diagram; init_en/x0 and step_en are this design's
// additions.
//
// Timing: one map iteration and one output bit per clock while
// ctrl.step_en is high; see basic_prng and gamma_buffer.
module enhanced_prng
  import prng_pkg::*;
#(
  parameter int unsigned W          = prng_pkg::WORD_W,
  parameter int unsigned M          = prng_pkg::NUM_GAMMA,
  parameter int unsigned GAMMA_FRAC = W - 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  prng_ctrl_t   ctrl,
  input  logic [W-1:0] config_data,
  input  logic [W-1:0] x0,
  output logic         random_bit,
  output logic         bit_valid,
  output logic [W-1:0] gamma,
  output logic [W-1:0] x,
  output logic         buf_empty,
  output logic         buf_full
);

  logic [W-1:0]           head;
  logic [$clog2(M+1)-1:0] buf_count;

  gamma_buffer #(.W(W), .M(M)) u_buffer (
    .clk         (clk),
    .rst_n       (rst_n),
    .write_en    (ctrl.write_en),
    .wr_sel_seed (ctrl.load_en),
    .config_data (config_data),
    .seed_gamma  (gamma),
    .read_en     (ctrl.read_en),
    .rd_data     (head),
    .count       (buf_count),
    .empty       (buf_empty),
    .full        (buf_full)
  );

  basic_prng #(.W(W), .GAMMA_FRAC(GAMMA_FRAC)) u_basic (
    .clk        (clk),
    .rst_n      (rst_n),
    .load_en    (ctrl.load_en),
    .gamma_in   (head),
    .init_en    (ctrl.init_en),
    .x0         (x0),
    .step_en    (ctrl.step_en),
    .gamma      (gamma),
    .x          (x),
    .random_bit (random_bit),
    .bit_valid  (bit_valid)
  );

endmodule
