// pe: one SCNN processing element.
//
// The PE computes, for its Wt x Ht tile of the image, one layer in the
// PlanarTiled-InputStationary-CartesianProduct-sparse order:
//   for each output-channel group g          (barrier between groups)
//     for each input channel c
//       for each activation vector of c      (I compressed activations)
//         for each weight vector of c's block (F compressed weights)
//           multiply all F x I pairs, scatter-add into the accumulators
// The state machine reads the channel's element count and then its vectors
// from the IARAM (one cycle of read latency each), run-length decodes the
// activations once per vector, and then issues one weight vector per cycle
// from the weight FIFO. The multiplier array, the coordinate computation and
// the crossbar slot registers work in the same cycle; the crossbar then
// needs one cycle per batch, or more when products collide on a bank, and
// the PE stalls meanwhile. The weight FIFO replays the block for every
// activation vector and frees it after the last one. A channel without
// stored activations only discards its weight block.
// At the end of a group the PE waits until the crossbar is empty, raises
// group_done and waits for barrier_release from the layer sequencer. Then
// the two accumulator sets swap, the PPU drains the finished group (halos,
// ReLU, compression into the OARAM) and the PE starts the next group.
// The two activation RAMs take the IARAM and OARAM roles given by ram_sel
// (0: RAM 0 is the IARAM). The ext_* ports load the IARAM and read it back
// (after a layer the roles swap, so the IARAM then holds the layer's
// output); reads through ext_* are only served while the PE is idle.
// The block structure follows the paper; the FSM, the barrier handshake and
// the memory port sharing are this design's.
module pe
  import scnn_pkg::*;
#(
  parameter int WDEPTH = WFIFO_DEPTH
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  layer_cfg_t            cfg,
  input  logic                  layer_start,
  input  logic                  ram_sel,
  // weight broadcast
  input  logic                  w_valid,
  output logic                  w_ready,
  input  wvec_t                 w_data,
  // global barrier
  output logic                  group_done,
  input  logic                  barrier_release,
  output logic                  ppu_idle,
  output logic                  busy,
  // neighbours
  output halo_msg_t             halo_out,
  input  halo_msg_t [NDIR-1:0]  halo_in,
  // activation load / read (IARAM role)
  input  logic                  ext_we,
  input  logic [ACT_ADDR_W-1:0] ext_waddr,
  input  avec_t                 ext_wdata,
  input  logic                  ext_cwe,
  input  logic [CH_W-1:0]       ext_cwch,
  input  logic [CNT_W-1:0]      ext_cwdata,
  input  logic                  ext_re,
  input  logic [ACT_ADDR_W-1:0] ext_raddr,
  output avec_t                 ext_rdata,
  input  logic                  ext_cre,
  input  logic [CH_W-1:0]       ext_crch,
  output logic [CNT_W-1:0]      ext_crdata,
  output pe_stats_t             stats
);
  localparam int NP = F * I;

  typedef enum logic [2:0] {P_IDLE, P_CH, P_CNT, P_FETCH, P_LOAD, P_COMP,
                            P_SKIP, P_GDONE} pstate_t;
  pstate_t st;

  logic [CH_W-1:0]       g, c;
  logic [ACT_ADDR_W-1:0] ia_ptr;
  logic [CNT_W-1:0]      cnt, a;
  logic [POS_W-1:0]      a_np, w_np;
  logic                  acc_sel;
  logic signed [I-1:0][DATA_W-1:0] a_val;
  logic [I-1:0][POS_W-1:0]         a_pos;
  logic [I-1:0]                    a_v;

  // ---------------- weight FIFO --------------------------------------------
  logic  f_valid, f_adv, f_rewind, f_release;
  wvec_t f_data;
  weight_fifo #(.DEPTH(WDEPTH)) u_wfifo (
    .clk, .rst_n,
    .push_valid(w_valid), .push_ready(w_ready), .push_data(w_data),
    .rd_valid(f_valid), .rd_data(f_data),
    .rd_adv(f_adv), .rd_rewind(f_rewind), .rd_release(f_release));

  // ---------------- activation RAMs ----------------------------------------
  logic                  ia_re, ia_cre;
  logic [ACT_ADDR_W-1:0] ia_raddr;
  logic [CH_W-1:0]       ia_crch;
  avec_t                 ram_rdata [2];
  logic [CNT_W-1:0]      ram_crdata [2];
  logic                  oa_we, oa_cwe;
  logic [ACT_ADDR_W-1:0] oa_waddr;
  avec_t                 oa_wdata;
  logic [CH_W-1:0]       oa_cwch;
  logic [CNT_W-1:0]      oa_cwdata;
  avec_t                 ia_rdata;
  logic [CNT_W-1:0]      ia_crdata;

  for (genvar j = 0; j < 2; j++) begin : g_ram
    wire is_ia = (ram_sel == 1'(j));
    act_ram u_ram (
      .clk,
      .we    (is_ia ? ext_we    : oa_we),
      .waddr (is_ia ? ext_waddr : oa_waddr),
      .wdata (is_ia ? ext_wdata : oa_wdata),
      .re    (is_ia && ia_re),
      .raddr (ia_raddr),
      .rdata (ram_rdata[j]),
      .cwe   (is_ia ? ext_cwe    : oa_cwe),
      .cwch  (is_ia ? ext_cwch   : oa_cwch),
      .cwdata(is_ia ? ext_cwdata : oa_cwdata),
      .cre   (is_ia && ia_cre),
      .crch  (ia_crch),
      .crdata(ram_crdata[j]));
  end
  assign ia_rdata   = ram_rdata[ram_sel];
  assign ia_crdata  = ram_crdata[ram_sel];
  assign ext_rdata  = ia_rdata;
  assign ext_crdata = ia_crdata;

  // ---------------- decode, coordinates, products ---------------------------
  logic [F-1:0][IDX_W-1:0] w_run;
  logic signed [F-1:0][DATA_W-1:0] w_val;
  logic [I-1:0][IDX_W-1:0] ar_run;
  logic [I-1:0]            ar_v;
  logic [F-1:0][POS_W-1:0] w_pos;
  logic [I-1:0][POS_W-1:0] ar_pos;
  logic [POS_W-1:0]        w_next, ar_next;
  always_comb begin
    for (int f = 0; f < F; f++) begin
      w_run[f] = f_data.e[f].run;
      w_val[f] = f_data.e[f].val;
    end
    for (int i = 0; i < I; i++) begin
      ar_run[i] = ia_rdata[i].run;
      ar_v[i]   = (32'(a) * I + i) < 32'(cnt);
    end
  end

  rle_decode #(.N(F)) u_wdec (.start(w_np), .run(w_run), .valid(f_data.valid),
                              .pos(w_pos), .next(w_next));
  rle_decode #(.N(I)) u_adec (.start(a_np), .run(ar_run), .valid(ar_v),
                              .pos(ar_pos), .next(ar_next));

  logic [NP-1:0][BANK_W-1:0]  p_bank;
  logic [NP-1:0][ENTRY_W-1:0] p_entry;
  logic signed [NP-1:0][ACC_W-1:0] p_val;
  logic [NP-1:0]              p_v;
  coord_compute u_coord (.cfg, .wpos(w_pos), .apos(a_pos),
                         .bank(p_bank), .entry(p_entry));
  mult_array u_mul (.w(w_val), .wv(f_data.valid), .a(a_val), .av(a_v),
                    .p(p_val), .pv(p_v));

  // ---------------- scatter crossbar and accumulator banks ------------------
  logic fire, x_ready, x_conflict, x_busy;
  logic [A-1:0]              u_valid;
  logic [A-1:0][ENTRY_W-1:0] u_entry;
  logic [A-1:0][ACC_W-1:0]   u_val;
  scatter_xbar u_xbar (
    .clk, .rst_n, .in_valid(fire), .in_ready(x_ready),
    .in_pv(p_v), .in_bank(p_bank), .in_entry(p_entry), .in_val(p_val),
    .upd_valid(u_valid), .upd_entry(u_entry), .upd_val(u_val),
    .conflict(x_conflict), .busy(x_busy));

  logic [ACC_ADDR_W-1:0] d_addr, h_addr;
  logic                  d_clr, h_valid;
  logic [ACC_W-1:0]      h_val;
  logic [A-1:0][ACC_W-1:0] b_rd;
  for (genvar b = 0; b < A; b++) begin : g_bank
    acc_bank u_bank (
      .clk, .rst_n, .sel(acc_sel),
      .upd_valid(u_valid[b]), .upd_entry(u_entry[b]), .upd_val(u_val[b]),
      .rd_entry(d_addr[BANK_W +: ENTRY_W]), .rd_data(b_rd[b]),
      .rd_clr(d_clr && d_addr[BANK_W-1:0] == BANK_W'(b)),
      .hadd_valid(h_valid && h_addr[BANK_W-1:0] == BANK_W'(b)),
      .hadd_entry(h_addr[BANK_W +: ENTRY_W]), .hadd_val(h_val));
  end

  // ---------------- PPU -----------------------------------------------------
  logic ppu_start, ev_recv, ev_ph;
  ppu u_ppu (
    .clk, .rst_n, .cfg, .layer_start, .start(ppu_start), .grp(g),
    .idle(ppu_idle),
    .acc_addr(d_addr), .acc_data(b_rd[d_addr[BANK_W-1:0]]), .acc_clr(d_clr),
    .hadd_valid(h_valid), .hadd_addr(h_addr), .hadd_val(h_val),
    .halo_out, .halo_in,
    .oa_we, .oa_waddr, .oa_wdata, .oa_cwe, .oa_cwch, .oa_cwdata,
    .ev_halo_recv(ev_recv), .ev_placeholder(ev_ph));

  // ---------------- control -------------------------------------------------
  logic [CNT_W-1:0] nwords;
  logic             last_vec, last_ch;
  assign nwords   = (cnt + CNT_W'(I - 1)) / CNT_W'(I);
  assign last_vec = (a == nwords - 1'b1);
  assign last_ch  = (c == cfg.num_c - 1'b1);

  assign busy       = (st != P_IDLE);
  assign group_done = (st == P_GDONE) && !x_busy;
  assign fire       = (st == P_COMP) && f_valid && x_ready;
  assign ppu_start  = (st == P_GDONE) && barrier_release;

  always_comb begin
    ia_re    = 1'b0;
    ia_raddr = ia_ptr + ACT_ADDR_W'(a);
    ia_cre   = 1'b0;
    ia_crch  = c;
    f_adv = 1'b0; f_rewind = 1'b0; f_release = 1'b0;
    unique case (st)
      P_IDLE: begin
        ia_re = ext_re;  ia_raddr = ext_raddr;
        ia_cre = ext_cre; ia_crch = ext_crch;
      end
      P_CH:    ia_cre = 1'b1;
      P_FETCH: ia_re  = 1'b1;
      P_COMP: if (fire) begin
        if (!f_data.last)  f_adv = 1'b1;
        else if (last_vec) f_release = 1'b1;
        else               f_rewind = 1'b1;
      end
      P_SKIP: if (f_valid) begin
        if (f_data.last) f_release = 1'b1;
        else             f_adv = 1'b1;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= P_IDLE; g <= '0; c <= '0; ia_ptr <= '0; cnt <= '0; a <= '0;
      a_np <= '0; w_np <= '0; acc_sel <= 1'b0;
      a_val <= '0; a_pos <= '0; a_v <= '0;
    end else begin
      unique case (st)
        P_IDLE: if (layer_start) begin
          g <= '0; c <= '0; ia_ptr <= '0; st <= P_CH;
        end
        P_CH: st <= P_CNT;
        P_CNT: begin
          cnt <= ia_crdata; a <= '0; a_np <= '0;
          st  <= (ia_crdata == '0) ? P_SKIP : P_FETCH;
        end
        P_FETCH: st <= P_LOAD;
        P_LOAD: begin
          for (int i = 0; i < I; i++) a_val[i] <= ia_rdata[i].val;
          a_pos <= ar_pos;
          a_v   <= ar_v;
          a_np  <= ar_next;
          w_np  <= '0;
          st    <= P_COMP;
        end
        P_COMP: if (fire) begin
          w_np <= w_next;
          if (f_data.last) begin
            w_np <= '0;
            if (last_vec) begin
              ia_ptr <= ia_ptr + ACT_ADDR_W'(nwords);
              c      <= c + 1'b1;
              st     <= last_ch ? P_GDONE : P_CH;
            end else begin
              a  <= a + 1'b1;
              st <= P_FETCH;
            end
          end
        end
        P_SKIP: if (f_valid && f_data.last) begin
          c  <= c + 1'b1;
          st <= last_ch ? P_GDONE : P_CH;
        end
        P_GDONE: if (barrier_release) begin
          acc_sel <= !acc_sel;
          g       <= g + 1'b1;
          c       <= '0;
          ia_ptr  <= '0;
          st      <= (g == cfg.num_groups - 1'b1) ? P_IDLE : P_CH;
        end
        default: st <= P_IDLE;
      endcase
    end
  end

  // ---------------- event counters ------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stats <= '0;
    end else begin
      if (fire)                      stats.busy_cycles    <= stats.busy_cycles + 1;
      if (x_conflict)                stats.xbar_stalls    <= stats.xbar_stalls + 1;
      if (group_done)                stats.barrier_cycles <= stats.barrier_cycles + 1;
      if (halo_out.valid)            stats.halo_sent      <= stats.halo_sent + 1;
      if (ev_recv)                   stats.halo_recv      <= stats.halo_recv + 1;
      if (ev_ph)                     stats.placeholders   <= stats.placeholders + 1;
      if (!ppu_idle && st != P_IDLE && st != P_GDONE)
                                     stats.overlap_cycles <= stats.overlap_cycles + 1;
    end
  end

  // The barrier is only released to a PE that is waiting at it.
  a_release: assert property (@(posedge clk) disable iff (!rst_n)
    barrier_release |-> (st == P_GDONE && ppu_idle && !x_busy));
endmodule
