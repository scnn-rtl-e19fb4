// scnn_tb_pkg: reference model shared by the SCNN testbenches.
//
// Holds the golden arithmetic and encodings, written from the definitions
// and independent of the RTL:
//   rle_encode   run-length compression of a dense sequence: a non-zero
//                value is stored with the number of zeros before it, the
//                16th zero in a row is stored as a zero placeholder with
//                index 15, trailing zeros are dropped
//   prod         one Q8.8 x Q8.8 product scaled to Q16.8 (floor)
//   to16         ReLU (optional) and saturation of a Q16.8 sum to Q8.8
// Dense tensors are flat int queues: activations [c][x][y], weights
// [k][c][r][s], with the last index fastest.
package scnn_tb_pkg;
  import scnn_pkg::*;

  typedef sp_elem_t elem_q_t [$];

  function automatic elem_q_t rle_encode(input int v [$]);
    elem_q_t q;
    int run;
    run = 0;
    foreach (v[n]) begin
      if (v[n] != 0) begin
        q.push_back('{val: 16'(v[n]), run: 4'(run)});
        run = 0;
      end else if (run == 15) begin
        q.push_back('{val: 16'd0, run: 4'd15});
        run = 0;
      end else run++;
    end
    return q;
  endfunction

  function automatic int prod(input int a, input int w);
    return (a * w) >>> FRAC;
  endfunction

  function automatic int to16(input int acc, input bit relu);
    int v;
    v = acc;
    if (relu && v < 0) v = 0;
    if (v > 32767) v = 32767;
    if (v < -32768) v = -32768;
    return v;
  endfunction

  // Random Q8.8 value with the given density (percent) in [lo, hi].
  function automatic int rnd_val(input int density, input int lo, input int hi);
    int v;
    if ($urandom_range(0, 99) >= density) return 0;
    v = $urandom_range(0, hi - lo) + lo;
    if (v == 0) v = 1;
    return v;
  endfunction
endpackage
