// coord_compute: output coordinates of the F x I Cartesian product.
//
// Inputs are the decoded linear positions of F weights inside their
// Kc x R x S block (order k, r, s with s fastest) and of I activations
// inside the Wt x Ht tile (order x, y with y fastest). For every pair it
// computes the position of the product in the PE's dense accumulator range
// of Kc x (Wt+R-1) x (Ht+S-1) entries, which includes the halo ring:
//     k = k_w,  lx = x_a - r + (R-1),  ly = y_a - s + (S-1)
//     addr = (k * (Wt+R-1) + lx) * (Ht+S-1) + ly
// and splits the address into bank = addr mod A and entry = addr / A, so
// that neighbouring outputs land in different banks. Purely combinational;
// the PE registers the result together with the products.
// The formula follows the paper's accumulator buffer shape
// acc_buf[Kc][Wt+R-1][Ht+S-1]; the linear orders and the bank hash are this
// design's choice.
module coord_compute
  import scnn_pkg::*;
#(
  parameter int NF = F,
  parameter int NI = I
) (
  input  layer_cfg_t                 cfg,
  input  logic [NF-1:0][POS_W-1:0]   wpos,
  input  logic [NI-1:0][POS_W-1:0]   apos,
  output logic [NF*NI-1:0][BANK_W-1:0]  bank,
  output logic [NF*NI-1:0][ENTRY_W-1:0] entry
);
  logic [7:0] rs, wa, ha;
  assign rs = 8'(cfg.r) * 8'(cfg.s);
  assign wa = 8'(cfg.wt) + 8'(cfg.r) - 8'd1;
  assign ha = 8'(cfg.ht) + 8'(cfg.s) - 8'd1;

  logic [NF-1:0][POS_W-1:0] wk, wr, ws;
  logic [NI-1:0][POS_W-1:0] ax, ay;

  always_comb begin
    for (int f = 0; f < NF; f++) begin
      logic [POS_W-1:0] rem;
      wk[f] = wpos[f] / POS_W'(rs);
      rem   = wpos[f] % POS_W'(rs);
      wr[f] = rem / POS_W'(cfg.s);
      ws[f] = rem % POS_W'(cfg.s);
    end
    for (int i = 0; i < NI; i++) begin
      ax[i] = apos[i] / POS_W'(cfg.ht);
      ay[i] = apos[i] % POS_W'(cfg.ht);
    end
  end

  always_comb begin
    for (int f = 0; f < NF; f++) begin
      for (int i = 0; i < NI; i++) begin
        logic [15:0] lx, ly, addr;
        lx   = 16'(ax[i]) + 16'(cfg.r) - 16'd1 - 16'(wr[f]);
        ly   = 16'(ay[i]) + 16'(cfg.s) - 16'd1 - 16'(ws[f]);
        addr = (16'(wk[f]) * 16'(wa) + lx) * 16'(ha) + ly;
        bank[f*NI+i]  = addr[BANK_W-1:0];
        entry[f*NI+i] = addr[BANK_W +: ENTRY_W];
      end
    end
  end
endmodule
