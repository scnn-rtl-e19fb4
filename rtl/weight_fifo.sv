// weight_fifo: the PE's compressed-sparse weight buffer.
//
// Every entry holds one vector of F non-zero weights with their 4-bit
// run-length indices (50 entries of 4 x (16 + 4) bits = 500 bytes, as in the
// paper), plus a lane-valid mask and a last-of-block flag added by this
// design. A block is all the weights of one input channel for the current
// output-channel group. In the input-stationary dataflow the block is read
// once for every activation vector of that channel, so besides a head
// (oldest entry) and a tail (write side) the FIFO keeps a replay pointer:
//   rd_adv      move the replay pointer to the next entry
//   rd_rewind   move it back to the head (start of the block) for the next
//               activation vector
//   rd_release  free the block: head and replay pointer move past the
//               current (last) entry
// rd_data shows the entry at the replay pointer in the same cycle (the
// storage is a register array); rd_valid says that entry has been written.
// Writes use a ready/valid handshake; ready is low when all entries are in
// use. A block larger than DEPTH entries would deadlock the PE; an assertion
// flags it.
module weight_fifo
  import scnn_pkg::*;
#(
  parameter int DEPTH = WFIFO_DEPTH
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  push_valid,
  output logic  push_ready,
  input  wvec_t push_data,
  output logic  rd_valid,
  output wvec_t rd_data,
  input  logic  rd_adv,
  input  logic  rd_rewind,
  input  logic  rd_release
);
  localparam int PW = $clog2(DEPTH);

  wvec_t mem [DEPTH];
  logic [PW-1:0] head, tail, rptr;
  logic [PW:0]   used;       // entries between head and tail
  logic [PW:0]   rd_ahead;   // entries between rptr and tail

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  assign push_ready = (used != (PW+1)'(DEPTH));
  assign rd_valid   = (rd_ahead != '0);
  assign rd_data    = mem[rptr];

  wire do_push = push_valid && push_ready;
  // Entries from the head up to and including rptr are released.
  logic [PW:0] rel_cnt;
  assign rel_cnt = used - rd_ahead + 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head <= '0; tail <= '0; rptr <= '0; used <= '0; rd_ahead <= '0;
    end else begin
      logic [PW:0] u, ra;
      u  = used;
      ra = rd_ahead;
      if (do_push) begin
        tail <= inc(tail);
        u  = u + 1'b1;
        ra = ra + 1'b1;
      end
      if (rd_release && rd_valid) begin
        rptr <= inc(rptr);
        head <= inc(rptr);
        u  = u - rel_cnt;
        ra = ra - 1'b1;
      end else if (rd_rewind) begin
        rptr <= head;
        ra   = ra + (used - rd_ahead);
      end else if (rd_adv && rd_valid) begin
        rptr <= inc(rptr);
        ra   = ra - 1'b1;
      end
      used     <= u;
      rd_ahead <= ra;
    end
  end

  always_ff @(posedge clk) if (do_push) mem[tail] <= push_data;

  // A block must fit: the FIFO must never be full while the replay pointer
  // has run out of entries of an unfinished block.
  a_block_fits: assert property (@(posedge clk) disable iff (!rst_n)
    !(used == (PW+1)'(DEPTH) && rd_ahead == '0));
endmodule
