// ppu: post-processing unit of a PE.
//
// When the PE finishes an output-channel group, the accumulator sets are
// swapped and start pulses here; the PPU then works on the idle set while
// the PE already computes the next group. It runs two passes:
//  1. Halo pass. Scans every entry of the Kc x (Wt+R-1) x (Ht+S-1)
//     accumulator range, one per cycle. An entry outside the Wt x Ht
//     interior holds a partial sum of an output that belongs to one of the
//     8 neighbouring tiles; it is read, cleared and sent (registered) on
//     halo_out with its direction and its address at the receiver.
//     At the same time the PPU adds partial sums arriving on halo_in from
//     its neighbours into its own interior entries. All PEs start this pass
//     in the same cycle (global barrier), scan in the same order and so send
//     in the same direction every cycle: a PE accepts, from its neighbour in
//     direction d, only a message whose direction is the opposite of d, and
//     at most one such message arrives per cycle.
//  2. Drain pass, after two idle cycles that let the last halo sums land.
//     Reads and clears the interior in channel, x, y order, applies ReLU
//     (when cfg.relu), saturates the Q16.8 sum to a 16-bit Q8.8 value and
//     run-length compresses the channel: a non-zero value is stored with the
//     number of zeros before it; after 15 zeros a zero placeholder with
//     index 15 is stored; trailing zeros are not stored. Elements are packed
//     I per word into the OARAM, a new word for every channel, and the
//     channel's element count goes to the OARAM count table.
// Timing: pass 1 takes Kc*(Wt+R-1)*(Ht+S-1) cycles, pass 2 Kc*Wt*Ht
// cycles, plus 3. idle is high when the PPU can take a new group.
// The three duties (halos, ReLU, compression) are the paper's; the two-pass
// schedule, message format, saturation and packing are this design's.
module ppu
  import scnn_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  layer_cfg_t             cfg,
  input  logic                   layer_start,   // resets the OARAM pointer
  input  logic                   start,         // drain one group
  input  logic [CH_W-1:0]        grp,           // group number
  output logic                   idle,
  // accumulator drain side
  output logic [ACC_ADDR_W-1:0]  acc_addr,
  input  logic [ACC_W-1:0]       acc_data,
  output logic                   acc_clr,
  output logic                   hadd_valid,
  output logic [ACC_ADDR_W-1:0]  hadd_addr,
  output logic [ACC_W-1:0]       hadd_val,
  // neighbours
  output halo_msg_t              halo_out,
  input  halo_msg_t [NDIR-1:0]   halo_in,
  // OARAM
  output logic                   oa_we,
  output logic [ACT_ADDR_W-1:0]  oa_waddr,
  output avec_t                  oa_wdata,
  output logic                   oa_cwe,
  output logic [CH_W-1:0]        oa_cwch,
  output logic [CNT_W-1:0]       oa_cwdata,
  // events
  output logic                   ev_halo_recv,
  output logic                   ev_placeholder
);
  typedef enum logic [1:0] {S_IDLE, S_HALO, S_GAP, S_DRAIN} state_t;
  state_t st;

  logic [4:0]  k;
  logic [5:0]  x, y;          // lx/ly in the halo pass, x/y in the drain pass
  logic [1:0]  gap;
  logic [CH_W-1:0] g;
  logic [IDX_W-1:0] run;
  logic [CNT_W-1:0] ch_cnt;
  avec_t       pk;
  logic [$clog2(I+1)-1:0] fill;
  logic [ACT_ADDR_W-1:0]  optr;

  logic [5:0] wa, ha, pr, ps;
  assign wa = cfg.wt + 6'(cfg.r) - 6'd1;
  assign ha = cfg.ht + 6'(cfg.s) - 6'd1;
  assign pr = (6'(cfg.r) - 6'd1) >> 1;
  assign ps = (6'(cfg.s) - 6'd1) >> 1;

  function automatic logic [ACC_ADDR_W-1:0] addr_of(input logic [4:0] kk,
      input logic [5:0] lx, input logic [5:0] ly, input logic [5:0] w6,
      input logic [5:0] h6);
    return ACC_ADDR_W'((16'(kk) * 16'(w6) + 16'(lx)) * 16'(h6) + 16'(ly));
  endfunction

  // ---------------- halo pass: classification of the current entry -------
  logic       west, east, north, south, is_halo;
  logic [5:0] dlx, dly;
  logic [2:0] dir;
  always_comb begin
    west  = (x < pr);
    east  = (x >= cfg.wt + pr);
    north = (y < ps);
    south = (y >= cfg.ht + ps);
    is_halo = west || east || north || south;
    dlx = west ? x + cfg.wt : (east ? x - cfg.wt : x);
    dly = north ? y + cfg.ht : (south ? y - cfg.ht : y);
    unique case ({west, east, north, south})
      4'b0010: dir = 3'd0;  // N
      4'b0110: dir = 3'd1;  // NE
      4'b0100: dir = 3'd2;  // E
      4'b0101: dir = 3'd3;  // SE
      4'b0001: dir = 3'd4;  // S
      4'b1001: dir = 3'd5;  // SW
      4'b1000: dir = 3'd6;  // W
      4'b1010: dir = 3'd7;  // NW
      default: dir = 3'd0;
    endcase
  end

  // ---------------- drain pass: ReLU, 16-bit conversion, compression -----
  logic signed [ACC_W-1:0]  sv;
  logic signed [DATA_W-1:0] v16;
  logic  zero, emit, last_ch, wr_word;
  sp_elem_t elem;
  avec_t    pk_n;
  logic [$clog2(I+1)-1:0] fill_n;
  always_comb begin
    sv = $signed(acc_data);
    if (cfg.relu && sv < 0) sv = '0;
    if (sv > 24'sd32767)       v16 = 16'sh7fff;
    else if (sv < -24'sd32768) v16 = 16'sh8000;
    else                       v16 = DATA_W'(sv);
    zero    = (v16 == '0);
    emit    = !zero || (run == '1);
    elem    = '{val: v16, run: run};
    last_ch = (x == cfg.wt - 6'd1) && (y == cfg.ht - 6'd1);
    pk_n    = pk;
    fill_n  = fill;
    if (emit) begin
      pk_n[fill[$clog2(I)-1:0]] = elem;
      fill_n = fill + 1'b1;
    end
    wr_word = (st == S_DRAIN) &&
              ((fill_n == ($clog2(I+1))'(I)) || (last_ch && fill_n != '0));
  end

  // ---------------- incoming halo sums ------------------------------------
  always_comb begin
    hadd_valid = 1'b0;
    hadd_addr  = '0;
    hadd_val   = '0;
    for (int d = 0; d < NDIR; d++) begin
      if (halo_in[d].valid && halo_in[d].dir == 3'(d + 4)) begin
        hadd_valid = 1'b1;
        hadd_addr  = halo_in[d].addr;
        hadd_val   = halo_in[d].val;
      end
    end
  end
  assign ev_halo_recv = hadd_valid;

  // ---------------- outputs to the accumulator and OARAM ----------------
  always_comb begin
    acc_addr  = (st == S_DRAIN) ? addr_of(k, x + pr, y + ps, wa, ha)
                                : addr_of(k, x, y, wa, ha);
    acc_clr   = (st == S_DRAIN) || (st == S_HALO && is_halo);
    oa_we     = wr_word;
    oa_waddr  = optr;
    oa_wdata  = pk_n;
    oa_cwe    = (st == S_DRAIN) && last_ch;
    oa_cwch   = CH_W'(g * CH_W'(cfg.kc) + CH_W'(k));
    oa_cwdata = ch_cnt + CNT_W'(emit);
    ev_placeholder = (st == S_DRAIN) && zero && emit;
  end

  assign idle = (st == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; k <= '0; x <= '0; y <= '0; gap <= '0; g <= '0;
      run <= '0; ch_cnt <= '0; pk <= '0; fill <= '0; optr <= '0;
      halo_out <= '0;
    end else begin
      halo_out <= '0;
      if (layer_start) optr <= '0;
      unique case (st)
        S_IDLE: if (start) begin
          st <= S_HALO; g <= grp; k <= '0; x <= '0; y <= '0;
        end
        S_HALO: begin
          if (is_halo) halo_out <= '{valid: 1'b1, dir: dir,
                                     addr: addr_of(k, dlx, dly, wa, ha),
                                     val: acc_data};
          if (y == ha - 6'd1) begin
            y <= '0;
            if (x == wa - 6'd1) begin
              x <= '0;
              if (k == cfg.kc - 5'd1) begin
                k <= '0; st <= S_GAP; gap <= 2'd1;
              end else k <= k + 1'b1;
            end else x <= x + 1'b1;
          end else y <= y + 1'b1;
        end
        S_GAP: begin
          if (gap == '0) st <= S_DRAIN;
          gap <= gap - 1'b1;
          run <= '0; ch_cnt <= '0; fill <= '0; pk <= '0;
        end
        S_DRAIN: begin
          run    <= emit ? '0 : run + 1'b1;
          ch_cnt <= ch_cnt + CNT_W'(emit);
          pk     <= pk_n;
          fill   <= fill_n;
          if (wr_word) begin
            optr <= optr + 1'b1;
            fill <= '0;
            pk   <= '0;
          end
          if (last_ch) begin
            run <= '0; ch_cnt <= '0;
          end
          if (y == cfg.ht - 6'd1) begin
            y <= '0;
            if (x == cfg.wt - 6'd1) begin
              x <= '0;
              if (k == cfg.kc - 5'd1) begin
                k <= '0; st <= S_IDLE;
              end else k <= k + 1'b1;
            end else x <= x + 1'b1;
          end else y <= y + 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // One neighbour at most sends to this PE in a cycle.
  logic [NDIR-1:0] hin_match;
  always_comb
    for (int d = 0; d < NDIR; d++)
      hin_match[d] = halo_in[d].valid && halo_in[d].dir == 3'(d + 4);
  a_one_sender: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0(hin_match));
endmodule
