// tb_acc_bank: self-checking test of a double-buffered accumulator bank.
// Random updates go to the active set while the other set is read, cleared
// and halo-added; a reference model of both sets checks every read, then
// the sets are swapped and the roles checked again. Checks that an update
// takes effect in the next cycle (single-cycle read-add-write).
module tb_acc_bank;
  import scnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic sel, upd_valid, rd_clr, hadd_valid;
  logic [ENTRY_W-1:0] upd_entry, rd_entry, hadd_entry;
  logic [ACC_W-1:0] upd_val, rd_data, hadd_val;
  logic [ACC_W-1:0] ref_acc [2][BANK_ENTRIES];
  int checks = 0, failures = 0;

  acc_bank dut (.*);

  initial begin
    sel = 0; upd_valid = 0; rd_clr = 0; hadd_valid = 0;
    upd_entry = '0; rd_entry = '0; hadd_entry = '0; upd_val = '0; hadd_val = '0;
    for (int s = 0; s < 2; s++) for (int e = 0; e < BANK_ENTRIES; e++) ref_acc[s][e] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int phase = 0; phase < 6; phase++) begin
      @(negedge clk); sel = phase[0];
      for (int t = 0; t < 400; t++) begin
        @(negedge clk);
        checks++;
        if (rd_data !== ref_acc[!sel][rd_entry]) begin
          failures++;
          if (failures < 10) $display("FAIL: set %0d entry %0d got %h want %h", !sel, rd_entry, rd_data, ref_acc[!sel][rd_entry]);
        end
        upd_valid = $urandom_range(0, 1); upd_entry = ENTRY_W'($urandom);
        upd_val = ACC_W'($urandom);
        rd_entry = ENTRY_W'($urandom); rd_clr = ($urandom_range(0, 7) == 0);
        hadd_valid = $urandom_range(0, 1);
        hadd_entry = ENTRY_W'($urandom);
        if (hadd_entry == rd_entry) hadd_entry = hadd_entry + 1'b1;
        hadd_val = ACC_W'($urandom);
        @(posedge clk);
        if (upd_valid) ref_acc[sel][upd_entry] += upd_val;
        if (hadd_valid) ref_acc[!sel][hadd_entry] += hadd_val;
        if (rd_clr) ref_acc[!sel][rd_entry] = '0;
      end
      @(negedge clk); upd_valid = 0; hadd_valid = 0; rd_clr = 0;
    end
    // Every entry of both sets, read through the drain port.
    for (int s = 0; s < 2; s++) begin
      @(negedge clk); sel = !s[0];
      for (int e = 0; e < BANK_ENTRIES; e++) begin
        rd_entry = ENTRY_W'(e); #1;
        checks++;
        if (rd_data !== ref_acc[s][e]) begin failures++; $display("FAIL: final set %0d entry %0d", s, e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
