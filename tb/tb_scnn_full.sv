// tb_scnn_full: end-to-end test of scnn_top at its default size, the 8 x 8
// PE array (1024 multipliers), with 6 x 5 tiles (a 48 x 40 image) and two
// layers; see scnn_tb_harness for what is run and checked.
module tb_scnn_full;
  import scnn_pkg::*;
  localparam int ROWS = 8, COLS = 8;
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

  scnn_top dut (.*);
  scnn_tb_harness #(.ROWS(ROWS), .COLS(COLS), .WATCHDOG(2000000)) hns (.*);
endmodule
