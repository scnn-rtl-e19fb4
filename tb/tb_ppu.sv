// tb_ppu: self-checking test of the post-processing unit.
// A behavioural accumulator (one array of 1024 partial sums with a
// combinational read, clear and halo-add ports) stands in for the banks.
// Each run fills the Kc x (Wt+R-1) x (Ht+S-1) range with random sums
// (zeros, negatives, values beyond the 16-bit range, long zero runs) and
// starts the PPU. Checked against values worked out here:
//  - every halo message (direction and receiver address) in scan order,
//  - halo sums injected from neighbours are added (messages with the wrong
//    direction are ignored),
//  - the OARAM words (ReLU, saturation, run-length code with placeholders,
//    I elements per word, new word per channel) and channel counts,
//  - all entries are cleared afterwards,
//  - the number of busy cycles, Kc*(Wt+R-1)*(Ht+S-1) + 2 + Kc*Wt*Ht.
module tb_ppu;
  import scnn_pkg::*, scnn_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  layer_cfg_t cfg;
  logic layer_start, start, idle, acc_clr, hadd_valid, oa_we, oa_cwe;
  logic [CH_W-1:0] grp, oa_cwch;
  logic [ACC_ADDR_W-1:0] acc_addr, hadd_addr;
  logic [ACC_W-1:0] acc_data, hadd_val;
  halo_msg_t halo_out;
  halo_msg_t [NDIR-1:0] halo_in;
  logic [ACT_ADDR_W-1:0] oa_waddr;
  avec_t oa_wdata;
  logic [CNT_W-1:0] oa_cwdata;
  logic ev_halo_recv, ev_placeholder;
  int checks = 0, failures = 0;

  ppu dut (.*);

  logic [ACC_W-1:0] accm [1024];
  assign acc_data = accm[acc_addr];
  always @(posedge clk) begin
    if (hadd_valid) accm[hadd_addr] <= accm[hadd_addr] + hadd_val;
    if (acc_clr) accm[acc_addr] <= '0;
  end

  // Captured outputs.
  halo_msg_t got_halo [$];
  avec_t got_w [$];
  int got_wa [$];
  int got_cch [$], got_cnt [$];
  int busy_cycles;
  always @(posedge clk) begin
    if (halo_out.valid) got_halo.push_back(halo_out);
    if (oa_we) begin got_w.push_back(oa_wdata); got_wa.push_back(int'(oa_waddr)); end
    if (oa_cwe) begin got_cch.push_back(int'(oa_cwch)); got_cnt.push_back(int'(oa_cwdata)); end
    if (!idle) busy_cycles++;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  int oa_base = 0;

  task automatic run(input int wt, input int ht, input int r, input int s,
                     input int kc, input int g, input bit relu, input bit lstart);
    int wa, ha, pr, ps, n;
    int fin [1024];
    halo_msg_t exp_halo [$];
    avec_t exp_w [$];
    int exp_cnt [$];
    wa = wt + r - 1; ha = ht + s - 1; pr = (r - 1) / 2; ps = (s - 1) / 2;
    n = kc * wa * ha;
    for (int a = 0; a < 1024; a++) accm[a] = '0;
    for (int a = 0; a < n; a++) begin
      case ($urandom_range(0, 7))
        0, 1, 2: accm[a] = '0;
        3: accm[a] = ACC_W'($urandom_range(32768, 200000));
        4: accm[a] = ACC_W'(-$urandom_range(1, 200000));
        default: accm[a] = ACC_W'($urandom_range(1, 3000));
      endcase
    end
    // A long zero run (4 columns) in channel 0 to force a placeholder.
    for (int y = 0; y < ht; y++) for (int x = 0; x < 4 && x < wt; x++)
      accm[(x + pr) * ha + y + ps] = '0;
    for (int a = 0; a < n; a++) fin[a] = int'($signed(accm[a]));
    // Expected halo messages.
    for (int k = 0; k < kc; k++)
      for (int lx = 0; lx < wa; lx++)
        for (int ly = 0; ly < ha; ly++) begin
          int dx, dy, d;
          dx = lx < pr ? -1 : (lx >= wt + pr ? 1 : 0);
          dy = ly < ps ? -1 : (ly >= ht + ps ? 1 : 0);
          if (dx != 0 || dy != 0) begin
            halo_msg_t m;
            d = (dx == 0 && dy == -1) ? 0 : (dx == 1 && dy == -1) ? 1 : (dx == 1 && dy == 0) ? 2 :
                (dx == 1 && dy == 1) ? 3 : (dx == 0 && dy == 1) ? 4 : (dx == -1 && dy == 1) ? 5 :
                (dx == -1 && dy == 0) ? 6 : 7;
            m.valid = 1'b1; m.dir = 3'(d);
            m.addr = ACC_ADDR_W'((k * wa + lx - dx * wt) * ha + ly - dy * ht);
            m.val = accm[(k * wa + lx) * ha + ly];
            exp_halo.push_back(m);
          end
        end
    cfg = '0; cfg.wt = 6'(wt); cfg.ht = 6'(ht); cfg.r = 4'(r); cfg.s = 4'(s);
    cfg.kc = 5'(kc); cfg.relu = relu;
    got_halo = {}; got_w = {}; got_wa = {}; got_cch = {}; got_cnt = {};
    @(negedge clk);
    layer_start = lstart;
    @(negedge clk);
    layer_start = 1'b0;
    if (lstart) oa_base = 0;
    busy_cycles = 0;
    grp = CH_W'(g); start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    // Inject neighbour sums during the halo pass.
    for (int t = 0; t < n - 1; t++) begin
      halo_in = '0;
      if ($urandom_range(0, 2) == 0) begin
        int d, k, x, y, a, v;
        d = $urandom_range(0, 7);
        k = $urandom_range(0, kc - 1); x = $urandom_range(0, wt - 1); y = $urandom_range(0, ht - 1);
        a = (k * wa + x + pr) * ha + y + ps;
        v = $urandom_range(0, 5000) - 2500;
        if (k == 0 && x < 4) v = 0;   // keep the zero run
        halo_in[d] = '{valid: 1'b1, dir: 3'(d + 4), addr: ACC_ADDR_W'(a), val: ACC_W'(v)};
        halo_in[(d + 1) % 8] = '{valid: 1'b1, dir: 3'(d), addr: ACC_ADDR_W'(a), val: ACC_W'(77)};
        fin[a] += v;
      end
      @(negedge clk);
    end
    halo_in = '0;
    while (!idle) @(negedge clk);
    // Expected OARAM contents.
    for (int k = 0; k < kc; k++) begin
      int tile [$];
      elem_q_t q;
      for (int x = 0; x < wt; x++)
        for (int y = 0; y < ht; y++) begin
          int v;
          v = (fin[(k * wa + x + pr) * ha + y + ps] << 8) >>> 8;
          tile.push_back(to16(v, relu));
        end
      q = rle_encode(tile);
      exp_cnt.push_back(q.size());
      for (int j = 0; j < q.size(); j += I) begin
        avec_t wd;
        wd = '0;
        for (int i = 0; i < I; i++) if (j + i < q.size()) wd[i] = q[j + i];
        exp_w.push_back(wd);
      end
    end
    check(got_halo.size() == exp_halo.size(), $sformatf("halo count %0d vs %0d", got_halo.size(), exp_halo.size()));
    foreach (exp_halo[j])
      if (j < got_halo.size())
        check(got_halo[j] == exp_halo[j], $sformatf("halo %0d: dir %0d addr %0d val %0d, expected dir %0d addr %0d val %0d",
              j, got_halo[j].dir, got_halo[j].addr, got_halo[j].val, exp_halo[j].dir, exp_halo[j].addr, exp_halo[j].val));
    check(got_w.size() == exp_w.size(), $sformatf("word count %0d vs %0d", got_w.size(), exp_w.size()));
    foreach (exp_w[j])
      if (j < got_w.size()) begin
        bit ok;
        ok = (got_wa[j] == oa_base + j);
        for (int i = 0; i < I; i++) ok &= (got_w[j][i] == exp_w[j][i]);
        check(ok, $sformatf("OARAM word %0d", j));
      end
    oa_base += exp_w.size();
    check(got_cnt.size() == kc, "count writes");
    foreach (exp_cnt[k])
      if (k < got_cnt.size())
        check(got_cnt[k] == exp_cnt[k] && got_cch[k] == g * kc + k,
              $sformatf("count of channel %0d: %0d, expected %0d", k, got_cnt[k], exp_cnt[k]));
    for (int a = 0; a < n; a++) check(accm[a] == '0, $sformatf("entry %0d not cleared", a));
    check(busy_cycles == n + 2 + kc * wt * ht,
          $sformatf("busy %0d cycles, expected %0d", busy_cycles, n + 2 + kc * wt * ht));
  endtask

  initial begin
    cfg = '0; layer_start = 0; start = 0; grp = '0; halo_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(4, 3, 3, 3, 2, 1, 1'b1, 1'b1);
    run(4, 3, 3, 3, 2, 2, 1'b1, 1'b0);
    run(6, 5, 3, 3, 3, 0, 1'b0, 1'b1);
    run(5, 4, 5, 3, 2, 4, 1'b1, 1'b0);
    run(6, 6, 1, 1, 4, 1, 1'b0, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
