// tb_mult_array: self-checking test of the F x I multiplier array.
// Random signed operands (including the extreme values) and lane valids;
// every product is compared with floor(w*a / 2^8) and every product valid
// with the AND of its two lane valids.
module tb_mult_array;
  import scnn_pkg::*;
  logic signed [F-1:0][DATA_W-1:0] w;
  logic [F-1:0] wv;
  logic signed [I-1:0][DATA_W-1:0] a;
  logic [I-1:0] av;
  logic signed [F*I-1:0][ACC_W-1:0] p;
  logic [F*I-1:0] pv;
  int checks = 0, failures = 0;

  mult_array dut (.*);

  function automatic logic [15:0] rnd16();
    case ($urandom_range(0, 5))
      0: return 16'h8000;
      1: return 16'h7fff;
      2: return 16'hffff;
      default: return 16'($urandom);
    endcase
  endfunction

  initial begin
    for (int t = 0; t < 3000; t++) begin
      for (int f = 0; f < F; f++) w[f] = rnd16();
      for (int i = 0; i < I; i++) a[i] = rnd16();
      wv = 4'($urandom); av = 4'($urandom);
      #1;
      for (int f = 0; f < F; f++)
        for (int i = 0; i < I; i++) begin
          longint prod, q;
          prod = longint'($signed(w[f])) * longint'($signed(a[i]));
          q = prod >>> 8;
          checks++;
          if ($signed(p[f*I+i]) != q || pv[f*I+i] != (wv[f] & av[i])) begin
            failures++;
            if (failures < 10) $display("FAIL: %0d * %0d -> %0d", $signed(w[f]), $signed(a[i]), $signed(p[f*I+i]));
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
