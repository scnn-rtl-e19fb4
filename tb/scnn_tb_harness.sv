// scnn_tb_harness: end-to-end stimulus and checker for scnn_top.
//
// Runs two convolution layers on a ROWS x COLS array with WT x HT tiles:
//   layer 1: C=3 -> K=8, Kc=4 (2 groups), 3x3 filters, ReLU
//   layer 2: C=8 -> K=8, Kc=2 (4 groups), 3x3 filters, no ReLU, taking
//            layer 1's output in place (IARAM/OARAM swap)
// Inputs and weights are random sparse Q8.8 values. Some tiles get an
// all-zero input channel (channel skip), one filter of layer 1 is pruned to
// zero (its output channel is all zero, so the compressor writes
// placeholders). The harness loads every PE's IARAM, streams the weights
// while the layer runs, reads every PE's output back after the layer and
// compares the compressed words and counts with the reference convolution
// (zero padding at the image border, "same" output size) compressed by the
// reference encoder. It also counts the mechanisms of the design and
// fails a run in which one of them never happened: crossbar conflict
// stalls, weight back-pressure, barrier waits, halo sums sent and received,
// compressor placeholders, PPU draining in parallel with computation, an
// empty input channel, ReLU clamping and the IARAM/OARAM swap.
// MODE 1 runs the filter shapes of the evaluated networks instead:
//   layer 1: C=4 -> K=16, Kc=8, 1x1 filters, ReLU (an inception 1x1 reduction)
//   layer 2: C=16 -> K=8, Kc=2, 5x5 filters, ReLU (an inception 5x5 branch,
//            AlexNet conv2)
// and checks the outputs, the halo exchange, the group count and the swaps.
module scnn_tb_harness
  import scnn_pkg::*, scnn_tb_pkg::*;
#(
  parameter int ROWS = 2,
  parameter int COLS = 2,
  parameter int WT   = 6,
  parameter int HT   = 5,
  parameter int WATCHDOG = 400000,
  parameter int MODE = 0
) (
  output logic clk,
  output logic rst_n,
  output logic start,
  output layer_cfg_t cfg,
  input  logic busy,
  input  logic done,
  output logic w_valid,
  input  logic w_ready,
  output wvec_t w_data,
  output logic [$clog2(ROWS*COLS+1)-1:0] ld_pe,
  output logic ld_we,
  output logic [ACT_ADDR_W-1:0] ld_addr,
  output avec_t ld_data,
  output logic ld_cwe,
  output logic [CH_W-1:0] ld_ch,
  output logic [CNT_W-1:0] ld_cnt,
  output logic [$clog2(ROWS*COLS+1)-1:0] rd_pe,
  output logic rd_re,
  output logic [ACT_ADDR_W-1:0] rd_addr,
  input  avec_t rd_data,
  output logic rd_cre,
  output logic [CH_W-1:0] rd_ch,
  input  logic [CNT_W-1:0] rd_cnt,
  input  pe_stats_t [ROWS*COLS-1:0] stats,
  input  logic [31:0] barrier_wait,
  input  logic [31:0] groups_done
);
  localparam int NPE = ROWS * COLS;
  localparam int W = COLS * WT, H = ROWS * HT;
  localparam int PW = $clog2(NPE + 1);

  int checks = 0, failures = 0;
  int n_wstall = 0, n_skip = 0, n_relu = 0, n_swap = 0;
  int layer_cycles [2];

  initial clk = 1'b0;
  always #5 clk = ~clk;

  always @(posedge clk) if (w_valid && !w_ready) n_wstall++;

  int act [$];        // current layer input, [c][x][y] over the whole image

  function automatic int aidx(int c, int x, int y);
    return (c * W + x) * H + y;
  endfunction

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", msg);
    end
  endtask

  // Load every PE's IARAM with its tile of act (C channels).
  task automatic load_inputs(input int C);
    for (int p = 0; p < NPE; p++) begin
      int pr, pc, wptr;
      pr = p / COLS; pc = p % COLS; wptr = 0;
      for (int c = 0; c < C; c++) begin
        int tile [$];
        elem_q_t q;
        for (int x = 0; x < WT; x++)
          for (int y = 0; y < HT; y++) tile.push_back(act[aidx(c, pc*WT + x, pr*HT + y)]);
        q = rle_encode(tile);
        // An all-zero tile may also be stored as an empty block.
        if (tile.max() == tile.min() && tile[0] == 0) q = {};
        if (q.size() == 0) n_skip++;
        for (int j = 0; j < q.size(); j += I) begin
          @(negedge clk);
          ld_pe = PW'(p); ld_we = 1'b1; ld_addr = ACT_ADDR_W'(wptr++);
          ld_data = '0;
          for (int i = 0; i < I; i++) if (j + i < q.size()) ld_data[i] = q[j + i];
        end
        @(negedge clk);
        ld_we = 1'b0; ld_cwe = 1'b1; ld_pe = PW'(p); ld_ch = CH_W'(c);
        ld_cnt = CNT_W'(q.size());
        @(negedge clk);
        ld_cwe = 1'b0;
      end
    end
  endtask

  // Stream the compressed weights: per group, per input channel, one block.
  task automatic stream_weights(input int wts [$], input int C, input int K,
                                input int KC, input int R, input int S);
    for (int g = 0; g < K / KC; g++) begin
      for (int c = 0; c < C; c++) begin
        int blk [$];
        elem_q_t q;
        int n;
        for (int k = g * KC; k < (g + 1) * KC; k++)
          for (int r = 0; r < R; r++)
            for (int s = 0; s < S; s++) blk.push_back(wts[((k * C + c) * R + r) * S + s]);
        q = rle_encode(blk);
        n = (q.size() + F - 1) / F;
        if (n == 0) n = 1;
        for (int e = 0; e < n; e++) begin
          wvec_t v;
          v = '0;
          v.last = (e == n - 1);
          for (int f = 0; f < F; f++)
            if (e * F + f < q.size()) begin
              v.e[f] = q[e * F + f];
              v.valid[f] = 1'b1;
            end
          @(negedge clk);
          w_valid = 1'b1; w_data = v;
          @(posedge clk);
          while (!w_ready) @(posedge clk);
        end
      end
    end
    @(negedge clk);
    w_valid = 1'b0;
  endtask

  // Reference layer: returns the dense output [k][x][y] after to16().
  function automatic void ref_layer(input int wts [$], input int C, input int K,
                                    input int R, input int S, input bit relu,
                                    output int res [$]);
    int pr, ps;
    pr = (R - 1) / 2; ps = (S - 1) / 2;
    res = {};
    for (int k = 0; k < K; k++)
      for (int x = 0; x < W; x++)
        for (int y = 0; y < H; y++) begin
          int acc;
          acc = 0;
          for (int c = 0; c < C; c++)
            for (int r = 0; r < R; r++)
              for (int s = 0; s < S; s++) begin
                int ix, iy;
                ix = x + r - pr; iy = y + s - ps;
                if (ix >= 0 && ix < W && iy >= 0 && iy < H)
                  acc += prod(act[aidx(c, ix, iy)], wts[((k * C + c) * R + r) * S + s]);
              end
          acc = (acc << 8) >>> 8;  // 24-bit accumulator
          if (relu && acc < 0) n_relu++;
          res.push_back(to16(acc, relu));
        end
  endfunction

  // Read all PEs' outputs and compare with the encoded reference.
  task automatic check_outputs(input int K, input int L);
    for (int p = 0; p < NPE; p++) begin
      int pr, pc, wptr;
      pr = p / COLS; pc = p % COLS; wptr = 0;
      for (int k = 0; k < K; k++) begin
        int tile [$];
        elem_q_t q;
        int n;
        for (int x = 0; x < WT; x++)
          for (int y = 0; y < HT; y++) tile.push_back(act[aidx(k, pc*WT + x, pr*HT + y)]);
        q = rle_encode(tile);
        @(negedge clk);
        rd_pe = PW'(p); rd_cre = 1'b1; rd_ch = CH_W'(k);
        @(negedge clk);
        rd_cre = 1'b0;
        check(32'(rd_cnt) == q.size(),
              $sformatf("layer %0d PE %0d channel %0d count %0d, expected %0d", L, p, k, rd_cnt, q.size()));
        n = (q.size() + I - 1) / I;
        for (int j = 0; j < n; j++) begin
          @(negedge clk);
          rd_re = 1'b1; rd_addr = ACT_ADDR_W'(wptr + j);
          @(negedge clk);
          rd_re = 1'b0;
          for (int i = 0; i < I; i++)
            if (j * I + i < q.size())
              check(rd_data[i] == q[j * I + i],
                    $sformatf("layer %0d PE %0d channel %0d element %0d: %0d/%0d, expected %0d/%0d",
                              L, p, k, j * I + i, $signed(rd_data[i].val), rd_data[i].run,
                              $signed(q[j * I + i].val), q[j * I + i].run));
        end
        wptr += n;
      end
    end
  endtask

  task automatic run_layer(input int L, input int C, input int K, input int KC,
                           input int R, input int S, input bit relu,
                           input int wts [$]);
    int res [$];
    int t0;
    @(negedge clk);
    cfg = '0;
    cfg.num_c = CH_W'(C); cfg.num_groups = CH_W'(K / KC); cfg.kc = 5'(KC);
    cfg.r = 4'(R); cfg.s = 4'(S); cfg.wt = 6'(WT); cfg.ht = 6'(HT); cfg.relu = relu;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    t0 = $time;
    fork
      stream_weights(wts, C, K, KC, R, S);
      begin @(posedge done); end
    join
    layer_cycles[L - 1] = ($time - t0) / 10;
    n_swap++;
    ref_layer(wts, C, K, R, S, relu, res);
    act = res;
    check_outputs(K, L);
  endtask

  initial begin
    int w1 [$], w2 [$];
    rst_n = 1'b0; start = 1'b0; cfg = '0; w_valid = 1'b0; w_data = '0;
    ld_pe = '0; ld_we = 1'b0; ld_addr = '0; ld_data = '0; ld_cwe = 1'b0;
    ld_ch = '0; ld_cnt = '0; rd_pe = '0; rd_re = 1'b0; rd_addr = '0;
    rd_cre = 1'b0; rd_ch = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    if (MODE == 0) begin
      // Layer 1 input: 3 channels; channel 1 is empty in every other tile.
      for (int c = 0; c < 3; c++)
        for (int x = 0; x < W; x++)
          for (int y = 0; y < H; y++) begin
            int tr, tc;
            tr = y / HT; tc = x / WT;
            if (c == 1 && (tr + tc) % 2 == 0) act.push_back(0);
            else act.push_back(rnd_val(c == 1 ? 20 : 60, 1, 600));
          end
      // Layer 1 weights: 8 x 3 x 3 x 3, filter 5 pruned to zero.
      for (int k = 0; k < 8; k++)
        for (int n = 0; n < 27; n++) w1.push_back(k == 5 ? 0 : rnd_val(45, -200, 200));
      for (int n = 0; n < 8 * 8 * 9; n++) w2.push_back(rnd_val(35, -150, 150));
      load_inputs(3);
      run_layer(1, 3, 8, 4, 3, 3, 1'b1, w1);
      run_layer(2, 8, 8, 2, 3, 3, 1'b0, w2);
    end else begin
      for (int n = 0; n < 4 * W * H; n++) act.push_back(rnd_val(50, 1, 600));
      for (int n = 0; n < 16 * 4; n++) w1.push_back(rnd_val(60, -250, 250));
      for (int n = 0; n < 8 * 16 * 25; n++) w2.push_back(rnd_val(30, -100, 100));
      load_inputs(4);
      run_layer(1, 4, 16, 8, 1, 1, 1'b1, w1);
      run_layer(2, 16, 8, 2, 5, 5, 1'b1, w2);
    end
    begin
      int xs, bw, hs, hr, ph, ov;
      xs = 0; hs = 0; hr = 0; ph = 0; ov = 0;
      for (int p = 0; p < NPE; p++) begin
        xs += stats[p].xbar_stalls; hs += stats[p].halo_sent;
        hr += stats[p].halo_recv; ph += stats[p].placeholders;
        ov += stats[p].overlap_cycles;
      end
      bw = barrier_wait;
      $display("cycles: layer1 %0d layer2 %0d; groups %0d", layer_cycles[0], layer_cycles[1], groups_done);
      $display("events: xbar stalls %0d, weight back-pressure %0d, barrier waits %0d, halo sent %0d received %0d, placeholders %0d, overlap %0d, empty channels %0d, relu clamps %0d, swaps %0d",
               xs, n_wstall, bw, hs, hr, ph, ov, n_skip, n_relu, n_swap);
      if (MODE == 0) begin
        check(xs > 0, "no crossbar conflict stall");
        check(n_wstall > 0, "no weight back-pressure");
        check(bw > 0 || NPE == 1, "no barrier wait");
        check(ph > 0, "no compressor placeholder");
        check(ov > 0, "PPU never overlapped computation");
        check(n_skip > 0, "no empty input channel");
      end
      check(hs > 0, "no halo sum sent");
      check(hr > 0 || NPE == 1, "no halo sum received");
      check(n_relu > 0, "ReLU never clamped");
      check(n_swap == 2, "IARAM/OARAM swap");
      check(groups_done == 6, "group count");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
