// scnn_top: the SCNN accelerator, an ROWS x COLS array of PEs (8 x 8 by
// default, 1024 multipliers) and the layer sequencer.
//
// Each PE owns a Wt x Ht tile of every activation plane: PE (row, col)
// holds x = col*Wt .. col*Wt+Wt-1 and y = row*Ht .. row*Ht+Ht-1 of the
// image. Its halo port goes to all 8 neighbours (N, NE, E, SE, S, SW, W,
// NW); a neighbour that does not exist (array edge) sends nothing and what
// is sent towards it is dropped, which gives zero padding at the image
// border.
// Interface:
//   start / cfg / busy / done   one layer; cfg is per-tile (see scnn_pkg)
//   w_valid / w_ready / w_data  compressed weight stream, broadcast to all
//                               PEs: for every output-channel group, for
//                               every input channel, one block of weight
//                               vectors ending with last = 1
//   ld_*                        write a word or a channel count into the
//                               IARAM of PE ld_pe (before a layer)
//   rd_*                        read a word or a count from the IARAM of PE
//                               rd_pe (data one cycle later); after a
//                               layer the roles have swapped, so this
//                               returns the layer's compressed output
//   stats / barrier_wait        event counters
// The array shape, the neighbour links and the sequencer follow the paper;
// the memory-side ports stand in for the DRAM controller, which is outside
// this design.
module scnn_top
  import scnn_pkg::*;
#(
  parameter int ROWS = 8,
  parameter int COLS = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  layer_cfg_t                  cfg,
  output logic                        busy,
  output logic                        done,
  input  logic                        w_valid,
  output logic                        w_ready,
  input  wvec_t                       w_data,
  input  logic [$clog2(ROWS*COLS+1)-1:0] ld_pe,
  input  logic                        ld_we,
  input  logic [ACT_ADDR_W-1:0]       ld_addr,
  input  avec_t                       ld_data,
  input  logic                        ld_cwe,
  input  logic [CH_W-1:0]             ld_ch,
  input  logic [CNT_W-1:0]            ld_cnt,
  input  logic [$clog2(ROWS*COLS+1)-1:0] rd_pe,
  input  logic                        rd_re,
  input  logic [ACT_ADDR_W-1:0]       rd_addr,
  output avec_t                       rd_data,
  input  logic                        rd_cre,
  input  logic [CH_W-1:0]             rd_ch,
  output logic [CNT_W-1:0]            rd_cnt,
  output pe_stats_t [ROWS*COLS-1:0]   stats,
  output logic [31:0]                 barrier_wait,
  output logic [31:0]                 groups_done
);
  localparam int NPE = ROWS * COLS;
  localparam int PW  = $clog2(NPE + 1);

  layer_cfg_t cfg_q;
  logic layer_start, ram_sel, release_q, bw_valid;
  wvec_t bw_data;
  logic [NPE-1:0] pe_wready, pe_gdone, pe_pidle, pe_busy;
  halo_msg_t [NPE-1:0] hout;
  avec_t [NPE-1:0] pe_rdata;
  logic [NPE-1:0][CNT_W-1:0] pe_rcnt;
  logic seq_busy;

  layer_sequencer #(.N_PE(NPE)) u_seq (
    .clk, .rst_n, .start, .cfg_in(cfg), .cfg(cfg_q), .busy(seq_busy), .done,
    .layer_start, .ram_sel,
    .w_in_valid(w_valid), .w_in_ready(w_ready), .w_in_data(w_data),
    .w_out_valid(bw_valid), .w_out_ready(pe_wready), .w_out_data(bw_data),
    .pe_group_done(pe_gdone), .pe_ppu_idle(pe_pidle),
    .barrier_release(release_q), .barrier_wait, .groups_done);
  assign busy = seq_busy || (pe_busy != '0);

  // Neighbour offsets by direction: N NE E SE S SW W NW.
  localparam int DR [NDIR] = '{-1, -1, 0, 1, 1, 1, 0, -1};
  localparam int DC [NDIR] = '{ 0,  1, 1, 1, 0, -1, -1, -1};

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      localparam int P = r * COLS + c;
      halo_msg_t [NDIR-1:0] hin;
      for (genvar d = 0; d < NDIR; d++) begin : g_dir
        if (r + DR[d] >= 0 && r + DR[d] < ROWS && c + DC[d] >= 0 &&
            c + DC[d] < COLS) begin : g_link
          assign hin[d] = hout[(r + DR[d]) * COLS + c + DC[d]];
        end else begin : g_edge
          assign hin[d] = '0;
        end
      end
      pe u_pe (
        .clk, .rst_n, .cfg(cfg_q), .layer_start, .ram_sel,
        .w_valid(bw_valid), .w_ready(pe_wready[P]), .w_data(bw_data),
        .group_done(pe_gdone[P]), .barrier_release(release_q),
        .ppu_idle(pe_pidle[P]), .busy(pe_busy[P]),
        .halo_out(hout[P]), .halo_in(hin),
        .ext_we(ld_we && ld_pe == PW'(P)), .ext_waddr(ld_addr),
        .ext_wdata(ld_data),
        .ext_cwe(ld_cwe && ld_pe == PW'(P)), .ext_cwch(ld_ch),
        .ext_cwdata(ld_cnt),
        .ext_re(rd_re && rd_pe == PW'(P)), .ext_raddr(rd_addr),
        .ext_rdata(pe_rdata[P]),
        .ext_cre(rd_cre && rd_pe == PW'(P)), .ext_crch(rd_ch),
        .ext_crdata(pe_rcnt[P]),
        .stats(stats[P]));
    end
  end

  // Read data come one cycle after the request, from the PE asked then.
  logic [PW-1:0] rd_pe_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rd_pe_q <= '0;
    else if (rd_re || rd_cre) rd_pe_q <= rd_pe;
  assign rd_data = pe_rdata[32'(rd_pe_q) < NPE ? rd_pe_q : '0];
  assign rd_cnt  = pe_rcnt[32'(rd_pe_q) < NPE ? rd_pe_q : '0];
endmodule
