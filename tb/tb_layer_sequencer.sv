// tb_layer_sequencer: self-checking test of the layer sequencer with 4 PEs.
// Starts a 3-group layer; checks the layer_start pulse and configuration,
// the weight broadcast handshake (valid/ready only when every PE is ready,
// data passed unchanged), that the barrier is released exactly in the
// cycle after the last PE arrives and only when all PPUs are idle, the
// barrier-wait count (cycles with some but not all PEs waiting), the done
// pulse only after the last PPU finishes, and the IARAM/OARAM role toggle.
module tb_layer_sequencer;
  import scnn_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, layer_start, ram_sel, w_in_valid, w_in_ready, w_out_valid;
  layer_cfg_t cfg_in, cfg;
  wvec_t w_in_data, w_out_data;
  logic [N-1:0] w_out_ready, pe_group_done, pe_ppu_idle;
  logic barrier_release;
  logic [31:0] barrier_wait, groups_done;
  int checks = 0, failures = 0;

  layer_sequencer #(.N_PE(N)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  // Weight handshake checker, every cycle, before the clock edge.
  always @(posedge clk) if (rst_n) begin
    check(w_out_valid == (busy && w_in_valid && (&w_out_ready)), "w_out_valid");
    check(w_in_ready == (busy && (&w_out_ready)), "w_in_ready");
    check(w_out_data == w_in_data, "w_out_data");
  end
  always @(negedge clk) if (rst_n) begin
    w_in_valid  = $urandom_range(0, 1);
    w_in_data   = wvec_t'({$urandom, $urandom, $urandom});
    w_out_ready = N'($urandom) | N'($urandom);
  end

  int done_seen = 0;
  always @(posedge clk) if (rst_n && done) done_seen++;

  initial begin
    int exp_wait;
    start = 0; cfg_in = '0; pe_group_done = '0; pe_ppu_idle = '1;
    w_in_valid = 0; w_in_data = '0; w_out_ready = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!busy && ram_sel == 1'b0, "idle after reset");
    cfg_in = '0; cfg_in.num_groups = 10'd3; cfg_in.kc = 5'd7; cfg_in.wt = 6'd9;
    start = 1;
    @(negedge clk);
    start = 0;
    check(layer_start && cfg == cfg_in && busy, "layer_start pulse and cfg");
    @(negedge clk);
    check(!layer_start, "layer_start is one cycle");
    exp_wait = 0;
    for (int g = 0; g < 3; g++) begin
      // PEs arrive one by one, a few cycles apart.
      for (int p = 0; p < N; p++) begin
        repeat ($urandom_range(1, 4)) begin
          @(negedge clk);
          check(!barrier_release, "release before all PEs arrived");
          if (pe_group_done != '0) exp_wait++;
        end
        pe_group_done[p] = 1'b1;
      end
      // One PPU is still busy with the previous group.
      if (g == 1) begin
        pe_ppu_idle[2] = 1'b0;
        repeat (3) begin
          @(negedge clk);
          check(!barrier_release, "release while a PPU is busy");
        end
        pe_ppu_idle[2] = 1'b1;
      end
      #1;
      check(barrier_release, $sformatf("release of group %0d", g));
      @(negedge clk);
      pe_group_done = '0;
      pe_ppu_idle = '0;     // PPUs start draining
      check(!barrier_release, "release is one cycle");
      check(groups_done == 32'(g + 1), "group count");
      repeat (5) begin
        @(negedge clk);
        check(!done, "done while PPUs drain");
      end
      pe_ppu_idle = '1;
    end
    repeat (3) @(negedge clk);
    check(!busy && ram_sel == 1'b1, "roles swapped after the layer");
    check(done_seen == 1, $sformatf("exactly one done pulse, saw %0d", done_seen));
    check(barrier_wait == 32'(exp_wait), $sformatf("barrier wait %0d, expected %0d", barrier_wait, exp_wait));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end


  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
