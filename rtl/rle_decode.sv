// rle_decode: run-length index decoder for one vector of N elements.
//
// Each compressed element carries the number of zeros that precede it.
// Given the position that the next element would take if it had no zeros
// in front (start), the decoder returns the linear position of every valid
// lane, pos[i] = start + sum_{j<i}(run[j] + 1) + run[i], and the start for
// the following vector. Valid lanes form a prefix of the vector.
// Purely combinational. This is the "combine the index vectors with the
// coordinates" step of the paper's coordinate computation.
module rle_decode
  import scnn_pkg::*;
#(
  parameter int N = 4
) (
  input  logic [POS_W-1:0] start,
  input  logic [N-1:0][IDX_W-1:0] run,
  input  logic [N-1:0]     valid,
  output logic [N-1:0][POS_W-1:0] pos,
  output logic [POS_W-1:0] next
);
  always_comb begin
    logic [POS_W-1:0] p;
    p    = start;
    next = start;
    for (int i = 0; i < N; i++) begin
      pos[i] = p + POS_W'(run[i]);
      if (valid[i]) begin
        next = pos[i] + 1'b1;
        p    = pos[i] + 1'b1;
      end
    end
  end
endmodule
