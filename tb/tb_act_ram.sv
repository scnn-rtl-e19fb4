// tb_act_ram: self-checking test of an activation RAM.
// Writes random vectors to every word and random counts to every channel
// entry, then reads them back in random order. Checks the data and the
// one-cycle read latency (rdata must not change prev_q the clock edge after
// re), and that a read without re keeps the previous output.
module tb_act_ram;
  import scnn_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we, re, cwe, cre;
  logic [ACT_ADDR_W-1:0] waddr, raddr;
  avec_t wdata, rdata;
  logic [CH_W-1:0] cwch, crch;
  logic [CNT_W-1:0] cwdata, crdata;
  int checks = 0, failures = 0;
  avec_t ref_mem [ACT_WORDS];
  logic [CNT_W-1:0] ref_cnt [MAX_CH];

  act_ram dut (.*);

  initial begin
    we = 0; re = 0; cwe = 0; cre = 0; waddr = '0; raddr = '0; wdata = '0;
    cwch = '0; crch = '0; cwdata = '0;
    for (int w = 0; w < ACT_WORDS; w++) begin
      @(negedge clk);
      we = 1; waddr = ACT_ADDR_W'(w);
      for (int i = 0; i < I; i++) wdata[i] = '{val: 16'($urandom), run: 4'($urandom)};
      ref_mem[w] = wdata;
      cwe = (w < MAX_CH); cwch = CH_W'(w); cwdata = CNT_W'($urandom);
      if (w < MAX_CH) ref_cnt[w] = cwdata;
    end
    @(negedge clk); we = 0; cwe = 0;
    for (int n = 0; n < 3000; n++) begin
      int w, ch;
      avec_t prev_q;
      w  = $urandom_range(0, ACT_WORDS - 1);
      ch = $urandom_range(0, MAX_CH - 1);
      @(negedge clk);
      re = 1; raddr = ACT_ADDR_W'(w); cre = 1; crch = CH_W'(ch);
      prev_q = rdata;
      #1;
      checks++;
      if (rdata !== prev_q) begin failures++; $display("FAIL: read not registered"); end
      @(negedge clk);
      re = 0; cre = 0;
      checks += 2;
      if (rdata !== ref_mem[w]) begin failures++; $display("FAIL: word %0d", w); end
      if (crdata !== ref_cnt[ch]) begin failures++; $display("FAIL: count %0d", ch); end
      raddr = ACT_ADDR_W'($urandom_range(0, ACT_WORDS - 1));
      @(negedge clk);
      checks++;
      if (rdata !== ref_mem[w]) begin failures++; $display("FAIL: output not held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
