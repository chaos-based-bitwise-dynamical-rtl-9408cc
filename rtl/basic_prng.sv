// basic_prng: the seed register, the state register, the feedback function
// and the output function of a logistic-map bit generator.
//
// The seed register holds the current chaotic parameter gamma. Its input mux
// either keeps the value or, with load_en, takes gamma_in (the head of the
// gamma buffer). The state register holds x_i; with step_en it takes
// x_{i+1} = f(x_i, gamma) from logistic_map, and with init_en it takes the
// initial value x0 instead (init_en wins). The output function is the least
// significant bit of each new x_i, as in the generator this RTL implements;
// the x0 load port and the reset values are this design's own choices.
//
// Timing: a step at clock edge t makes x and random_bit show x_{i+1} after
// edge t, with bit_valid high for that one cycle. load_en at the same edge as
// step_en still uses the old gamma for that step; the new gamma is used from
// the next step on. Both registers reset to 0.
module basic_prng #(
  parameter int unsigned W          = prng_pkg::WORD_W,
  parameter int unsigned GAMMA_FRAC = W - 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load_en,
  input  logic [W-1:0] gamma_in,
  input  logic         init_en,
  input  logic [W-1:0] x0,
  input  logic         step_en,
  output logic [W-1:0] gamma,
  output logic [W-1:0] x,
  output logic         random_bit,
  output logic         bit_valid
);

  logic [W-1:0] x_next;

  logistic_map #(.W(W), .GAMMA_FRAC(GAMMA_FRAC)) u_feedback (
    .x      (x),
    .gamma  (gamma),
    .x_next (x_next)
  );

  // Seed register with its hold/load mux.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       gamma <= '0;
    else if (load_en) gamma <= gamma_in;
  end

  // State register: initialisation or feedback.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x         <= '0;
      bit_valid <= 1'b0;
    end else begin
      if (init_en)      x <= x0;
      else if (step_en) x <= x_next;
      bit_valid <= step_en && !init_en;
    end
  end

  // Output function: the LSB of x_i.
  assign random_bit = x[0];

endmodule
