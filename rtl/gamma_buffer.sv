// gamma_buffer: the circular buffer that stores the gamma values, with the
// mux in front of its write port.
//
// A ring of M registers with a read pointer, a write pointer and a count,
// read first-word-fall-through: rd_data always shows the oldest value, and
// read_en removes it at the clock edge. The write port takes config_data
// (wr_sel_seed = 0, used while the host loads the values) or seed_gamma
// (wr_sel_seed = 1, the gamma that is leaving the seed register), which is
// how a value read out is put back at the tail and reused in turn. A read
// and a write may happen at the same edge, also when the buffer is full.
// A write to a full buffer without a read and a read from an empty buffer
// are ignored (and reported by assertions).
//
// The buffer's purpose and the input mux follow the generator's block
// diagram; the ring/pointer organisation is this design's choice. Pointers
// and count reset to 0; the storage is not reset.
module gamma_buffer #(
  parameter int unsigned W = prng_pkg::WORD_W,
  parameter int unsigned M = prng_pkg::NUM_GAMMA
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 write_en,
  input  logic                 wr_sel_seed,
  input  logic [W-1:0]         config_data,
  input  logic [W-1:0]         seed_gamma,
  input  logic                 read_en,
  output logic [W-1:0]         rd_data,
  output logic [$clog2(M+1)-1:0] count,
  output logic                 empty,
  output logic                 full
);

  localparam int unsigned PW = (M > 1) ? $clog2(M) : 1;
  localparam int unsigned CW = $clog2(M+1);

  logic [W-1:0]  mem [M];
  logic [PW-1:0] rd_ptr, wr_ptr;
  logic [W-1:0]  wr_data;
  logic          do_rd, do_wr;

  assign empty   = (count == '0);
  assign full    = (count == CW'(M));
  assign wr_data = wr_sel_seed ? seed_gamma : config_data;
  assign do_rd   = read_en && !empty;
  assign do_wr   = write_en && (!full || do_rd);
  assign rd_data = mem[rd_ptr];

  function automatic logic [PW-1:0] ptr_inc(input logic [PW-1:0] p);
    return (p == PW'(M - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_rd) rd_ptr <= ptr_inc(rd_ptr);
      if (do_wr) wr_ptr <= ptr_inc(wr_ptr);
      count <= count + CW'(do_wr) - CW'(do_rd);
    end
  end

  // Usage rules of the buffer.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    !(write_en && full && !read_en))
    else $error("gamma_buffer: write to a full buffer");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
    !(read_en && empty))
    else $error("gamma_buffer: read from an empty buffer");

endmodule
