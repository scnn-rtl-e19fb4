// tb_scnn_workloads: scnn_top on a 2 x 2 PE array with 6 x 5 tiles (a
// 12 x 10 image) running the 1x1 and 5x5 filter shapes of the evaluated
// networks (inception modules, AlexNet conv2) in two chained layers; the
// 3x3 shape is covered by tb_scnn_top. See scnn_tb_harness, MODE 1.
module tb_scnn_workloads;
  import scnn_pkg::*;
  localparam int ROWS = 2, COLS = 2;
  logic clk, rst_n, start, busy, done, w_valid, w_ready, ld_we, ld_cwe, rd_re, rd_cre;
  layer_cfg_t cfg;
  wvec_t w_data;
  logic [$clog2(ROWS*COLS+1)-1:0] ld_pe, rd_pe;
  logic [ACT_ADDR_W-1:0] ld_addr, rd_addr;
  avec_t ld_data, rd_data;
  logic [CH_W-1:0] ld_ch, rd_ch;
  logic [CNT_W-1:0] ld_cnt, rd_cnt;
  pe_stats_t [ROWS*COLS-1:0] stats;
  logic [31:0] barrier_wait, groups_done;

  scnn_top #(.ROWS(ROWS), .COLS(COLS)) dut (.*);
  scnn_tb_harness #(.ROWS(ROWS), .COLS(COLS), .MODE(1)) hns (.*);

  // Outer watchdog, behind the harness's own one.
  initial begin
    repeat (1000000) @(posedge clk);
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end
endmodule
