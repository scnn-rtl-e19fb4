// tb_weight_fifo: self-checking test of the weight FIFO.
// Fills the FIFO completely (ready must drop at 50 entries), then, while a
// writer keeps pushing, replays each block a random number of times with
// rewind and frees it with release. Every entry read is compared with the
// value written; the writer's stream is random blocks of 1..12 entries.
module tb_weight_fifo;
  import scnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push_valid, push_ready, rd_valid, rd_adv, rd_rewind, rd_release;
  wvec_t push_data, rd_data;
  int checks = 0, failures = 0;

  weight_fifo dut (.*);

  // Reference stream.
  wvec_t stream [$];
  int    blen   [$];
  int    wr_i = 0;

  function automatic wvec_t mk(int n, bit last);
    wvec_t v;
    v = '0;
    v.last = last;
    v.valid = 4'($urandom_range(1, 15));
    for (int f = 0; f < F; f++) v.e[f] = '{val: 16'($urandom), run: 4'($urandom)};
    v.e[0].val = 16'(n);
    return v;
  endfunction

  initial begin
    int total;
    total = 0;
    while (total < 400) begin
      int n;
      n = $urandom_range(1, 12);
      blen.push_back(n);
      for (int j = 0; j < n; j++) stream.push_back(mk(total + j, j == n - 1));
      total += n;
    end
  end

  initial begin
    push_valid = 0; push_data = '0; rd_adv = 0; rd_rewind = 0; rd_release = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Phase 1: fill without reading.
    @(negedge clk);
    while (push_ready) begin
      push_valid = 1; push_data = stream[wr_i];
      @(posedge clk); wr_i++;
      @(negedge clk);
    end
    push_valid = 0;
    checks++;
    if (wr_i != 50) begin
      failures++; $display("FAIL: full after %0d entries", wr_i);
    end
    repeat (2) @(negedge clk);
    checks++; if (push_ready) begin failures++; $display("FAIL: ready while full"); end
    // Phase 2: read blocks with replay while writing.
    fork
      begin : writer
        while (wr_i < stream.size()) begin
          @(negedge clk);
          push_valid = ($urandom_range(0, 3) != 0);
          push_data  = stream[wr_i];
          @(posedge clk);
          if (push_valid && push_ready) wr_i++;
        end
        @(negedge clk); push_valid = 0;
      end
      begin : reader
        int base;
        base = 0;
        foreach (blen[b]) begin
          int reps;
          reps = $urandom_range(1, 3);
          for (int r = 0; r < reps; r++) begin
            for (int j = 0; j < blen[b]; j++) begin
              @(negedge clk);
              rd_adv = 0; rd_rewind = 0; rd_release = 0;
              while (!rd_valid) @(negedge clk);
              checks++;
              if (rd_data != stream[base + j]) begin
                failures++;
                $display("FAIL: block %0d rep %0d entry %0d", b, r, j);
              end
              if (j == blen[b] - 1) begin
                if (r == reps - 1) rd_release = 1; else rd_rewind = 1;
              end else rd_adv = 1;
              @(posedge clk);
            end
          end
          base += blen[b];
        end
        @(negedge clk); rd_adv = 0; rd_rewind = 0; rd_release = 0;
      end
    join
    repeat (2) @(negedge clk);
    checks++;
    if (rd_valid) begin failures++; $display("FAIL: data left after all blocks"); end
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
