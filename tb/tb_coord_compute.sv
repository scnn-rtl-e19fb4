// tb_coord_compute: self-checking test of the coordinate computation.
// For random layer shapes (R, S in 1..5, Wt, Ht in 2..8, Kc chosen so the
// halo-extended range fits 1024 entries) and random weight and activation
// positions, compares every bank and entry with the address computed here
// from the definition addr = (k*(Wt+R-1) + x-r+R-1) * (Ht+S-1) + y-s+S-1.
module tb_coord_compute;
  import scnn_pkg::*;
  layer_cfg_t cfg;
  logic [F-1:0][POS_W-1:0] wpos;
  logic [I-1:0][POS_W-1:0] apos;
  logic [F*I-1:0][BANK_W-1:0] bank;
  logic [F*I-1:0][ENTRY_W-1:0] entry;
  int checks = 0, failures = 0;

  coord_compute dut (.*);

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int r, s, wt, ht, kc, wa, ha;
      r = $urandom_range(1, 5); s = $urandom_range(1, 5);
      wt = $urandom_range(2, 8); ht = $urandom_range(2, 8);
      wa = wt + r - 1; ha = ht + s - 1;
      kc = 1024 / (wa * ha); if (kc > 16) kc = 16;
      kc = $urandom_range(1, kc);
      cfg = '0;
      cfg.r = 4'(r); cfg.s = 4'(s); cfg.wt = 6'(wt); cfg.ht = 6'(ht);
      cfg.kc = 5'(kc);
      for (int f = 0; f < F; f++) wpos[f] = POS_W'($urandom_range(0, kc * r * s - 1));
      for (int i = 0; i < I; i++) apos[i] = POS_W'($urandom_range(0, wt * ht - 1));
      #1;
      for (int f = 0; f < F; f++) begin
        for (int i = 0; i < I; i++) begin
          int k, rr, ss, x, y, addr;
          k = wpos[f] / (r * s); rr = (wpos[f] / s) % r; ss = wpos[f] % s;
          x = apos[i] / ht; y = apos[i] % ht;
          addr = (k * wa + x - rr + r - 1) * ha + y - ss + s - 1;
          checks++;
          if (bank[f*I+i] != BANK_W'(addr % A) || entry[f*I+i] != ENTRY_W'(addr / A)) begin
            failures++;
            if (failures < 10)
              $display("FAIL: r%0d s%0d wt%0d ht%0d wpos %0d apos %0d: got %0d/%0d want %0d",
                       r, s, wt, ht, wpos[f], apos[i], entry[f*I+i], bank[f*I+i], addr);
          end
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
