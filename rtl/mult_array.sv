// mult_array: the PE's F x I multiplier array.
//
// Every weight of the F-vector is multiplied with every activation of the
// I-vector (a Cartesian product), so all F*I products are useful whenever
// all lanes are valid. Operands are 16-bit signed Q8.8 values (the paper
// gives the 16-bit multiplier width; the binary point is this design's
// choice); the 32-bit product is shifted right arithmetically by FRAC bits,
// which leaves a Q16.8 value that fits the 24-bit accumulator exactly.
// Product p[f*I+i] = w[f] * a[i]; pv marks products whose two lanes are
// valid. Purely combinational.
module mult_array
  import scnn_pkg::*;
#(
  parameter int NF = F,
  parameter int NI = I
) (
  input  logic signed [NF-1:0][DATA_W-1:0] w,
  input  logic [NF-1:0]                    wv,
  input  logic signed [NI-1:0][DATA_W-1:0] a,
  input  logic [NI-1:0]                    av,
  output logic signed [NF*NI-1:0][ACC_W-1:0] p,
  output logic [NF*NI-1:0]                 pv
);
  always_comb begin
    for (int f = 0; f < NF; f++) begin
      for (int i = 0; i < NI; i++) begin
        logic signed [2*DATA_W-1:0] prod;
        prod         = $signed(w[f]) * $signed(a[i]);
        p[f*NI+i]    = ACC_W'(prod >>> FRAC);
        pv[f*NI+i]   = wv[f] & av[i];
      end
    end
  end
endmodule
