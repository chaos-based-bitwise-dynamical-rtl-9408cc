// prng_control: the control block that runs the enhanced PRNG through the
// dynamical-parameter algorithm.
//
// It drives the enables of the enhanced PRNG (prng_ctrl_t) from a three-state
// machine:
//   IDLE   host writes gamma values (cfg_we while cfg_ready) into the buffer
//          through the config-data side of its input mux. start, with at
//          least one value stored, seeds the partition LCG.
//   PRIME  one cycle: the first gamma is popped into the seed register, x0 is
//          loaded into the state register and k_1 is taken from the LCG.
//   RUN    the map steps every cycle. After k_i steps with gamma_i, at the
//          edge of the k_i-th step, the next gamma is popped into the seed
//          register while the old one is pushed back through the seed side
//          of the buffer mux (selected by the load enable), and k_{i+1} is taken from the LCG. The m
//          stored values are thereby reused in their written order forever.
//          With only one value stored there is nothing to swap and gamma
//          stays; only k is renewed.
// Generation goes on until reset; reconfiguration needs a reset.
//
// The algorithm (k_i iterations per gamma_i, k_i random in [KMIN, KMAX] from
// an LCG, circular reuse of the gamma values) follows the generator's
// description; the state machine, the host handshake and the PRIME cycle are
// this design's choices.
//
// Outputs besides ctrl: running (in RUN), gamma_switch (a gamma change at
// this edge), k_cur (length of the current partition element).
module prng_control
  import prng_pkg::*;
#(
  parameter int unsigned KMIN = prng_pkg::K_MIN,
  parameter int unsigned KMAX = prng_pkg::K_MAX,
  parameter int unsigned KW   = prng_pkg::K_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cfg_we,
  output logic          cfg_ready,
  input  logic          start,
  input  logic [31:0]   lcg_seed,
  input  logic          buf_empty,
  input  logic          buf_full,
  output prng_ctrl_t    ctrl,
  output logic          running,
  output logic          gamma_switch,
  output logic [KW-1:0] k_cur
);

  typedef enum logic [1:0] {S_IDLE, S_PRIME, S_RUN} ctrl_state_e;

  ctrl_state_e   state_q, state_d;
  logic [KW-1:0] k_cnt_q, k_cnt_d;   // steps left with the current gamma
  logic [KW-1:0] k_len_q, k_len_d;   // length of the current partition element
  logic [KW-1:0] k_new;
  logic          lcg_load, lcg_adv;

  partition_lcg #(.KMIN(KMIN), .KMAX(KMAX), .KW(KW)) u_lcg (
    .clk       (clk),
    .rst_n     (rst_n),
    .seed_load (lcg_load),
    .seed      (lcg_seed),
    .advance   (lcg_adv),
    .k         (k_new)
  );

  always_comb begin
    state_d      = state_q;
    k_cnt_d      = k_cnt_q;
    k_len_d      = k_len_q;
    ctrl         = '0;
    lcg_load     = 1'b0;
    lcg_adv      = 1'b0;
    gamma_switch = 1'b0;
    cfg_ready    = (state_q == S_IDLE) && !buf_full;

    unique case (state_q)
      S_IDLE: begin
        if (cfg_we && cfg_ready) begin
          ctrl.write_en = 1'b1;
        end
        if (start && !buf_empty) begin
          lcg_load = 1'b1;
          state_d  = S_PRIME;
        end
      end
      S_PRIME: begin
        ctrl.read_en = 1'b1;
        ctrl.load_en = 1'b1;
        ctrl.init_en = 1'b1;
        k_cnt_d      = k_new;
        k_len_d      = k_new;
        lcg_adv      = 1'b1;
        state_d      = S_RUN;
      end
      S_RUN: begin
        ctrl.step_en = 1'b1;
        if (k_cnt_q <= KW'(1)) begin
          k_cnt_d = k_new;
          k_len_d = k_new;
          lcg_adv = 1'b1;
          if (!buf_empty) begin
            ctrl.read_en  = 1'b1;
            ctrl.load_en  = 1'b1;
            ctrl.write_en = 1'b1;
            gamma_switch  = 1'b1;
          end
        end else begin
          k_cnt_d = k_cnt_q - 1'b1;
        end
      end
      default: state_d = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      k_cnt_q <= '0;
      k_len_q <= '0;
    end else begin
      state_q <= state_d;
      k_cnt_q <= k_cnt_d;
      k_len_q <= k_len_d;
    end
  end

  assign running = (state_q == S_RUN);
  assign k_cur   = k_len_q;

  // A seed load always takes the buffer head, and a push during generation
  // always comes with a load, so it recirculates the seed register.
  a_load_reads: assert property (@(posedge clk) disable iff (!rst_n)
    ctrl.load_en |-> ctrl.read_en);
  a_run_recirculates: assert property (@(posedge clk) disable iff (!rst_n)
    (ctrl.write_en && running) |-> ctrl.load_en);

endmodule
