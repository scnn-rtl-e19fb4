// tb_scatter_xbar: self-checking test of the arbitrated crossbar.
// Sends random batches of 16 products (random valids, banks drawn from a
// small or the full range to make conflicts rare or common). Checks that
// every valid product reaches its bank exactly once with its entry and
// value, that no bank gets two updates in a cycle (by construction of the
// ports), and that a batch takes exactly max(products per bank) cycles,
// i.e. the stall equals the worst bank conflict.
module tb_scatter_xbar;
  import scnn_pkg::*;
  localparam int N = F * I;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, conflict, busy;
  logic [N-1:0] in_pv;
  logic [N-1:0][BANK_W-1:0] in_bank;
  logic [N-1:0][ENTRY_W-1:0] in_entry;
  logic [N-1:0][ACC_W-1:0] in_val;
  logic [A-1:0] upd_valid;
  logic [A-1:0][ENTRY_W-1:0] upd_entry;
  logic [A-1:0][ACC_W-1:0] upd_val;
  int checks = 0, failures = 0, conflicts_seen = 0;

  scatter_xbar dut (.*);

  initial begin
    in_valid = 0; in_pv = '0; in_bank = '0; in_entry = '0; in_val = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      int per_bank [A];
      int expect_cycles, cycles, got;
      logic [N-1:0] seen;
      int span;
      span = (t % 2) ? A : 4;
      foreach (per_bank[b]) per_bank[b] = 0;
      @(negedge clk);
      in_pv = N'($urandom) | N'($urandom);
      for (int n = 0; n < N; n++) begin
        in_bank[n]  = BANK_W'($urandom_range(0, span - 1));
        in_entry[n] = ENTRY_W'($urandom);
        in_val[n]   = ACC_W'($urandom);
        if (in_pv[n]) per_bank[in_bank[n]]++;
      end
      expect_cycles = 0;
      foreach (per_bank[b]) if (per_bank[b] > expect_cycles) expect_cycles = per_bank[b];
      checks++;
      if (!in_ready) begin failures++; $display("FAIL: not ready when idle"); end
      in_valid = 1;
      @(posedge clk);
      #1 in_valid = 0;
      seen = '0; cycles = 0;
      while (busy) begin
        cycles++;
        if (conflict) conflicts_seen++;
        for (int b = 0; b < A; b++) if (upd_valid[b]) begin
          got = -1;
          for (int n = 0; n < N; n++)
            if (got < 0 && in_pv[n] && !seen[n] && in_bank[n] == BANK_W'(b)) got = n;
          checks++;
          if (got < 0 || upd_entry[b] != in_entry[got] || upd_val[b] != in_val[got]) begin
            failures++; $display("FAIL: bank %0d wrong update", b);
          end else seen[got] = 1'b1;
        end
        @(posedge clk); #1;
      end
      checks += 2;
      if (seen != in_pv) begin failures++; $display("FAIL: products lost %h vs %h", seen, in_pv); end
      if (cycles != expect_cycles) begin
        failures++; $display("FAIL: batch took %0d cycles, expected %0d", cycles, expect_cycles);
      end
    end
    checks++;
    if (conflicts_seen == 0) begin failures++; $display("FAIL: no conflicts exercised"); end
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
