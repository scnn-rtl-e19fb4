// tb_pe: test of one PE in a 1 x 1 array (the PE driven by the layer
// sequencer): a 6 x 5 tile, two layers, zero padding on all sides; see scnn_tb_harness
// for what is run and checked.
module tb_pe;
  import scnn_pkg::*;
  localparam int ROWS = 1, COLS = 1;
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
  scnn_tb_harness #(.ROWS(ROWS), .COLS(COLS)) hns (.*);
endmodule
