// scatter_xbar: arbitrated F*I-to-A crossbar between the multiplier array
// and the accumulator banks.
//
// A batch of N products, each with a target bank and entry, is captured in
// N slot registers when in_valid and in_ready are both high. Every cycle
// each bank grants at most one pending slot that targets it, lowest slot
// number first, and forwards that product to the bank as an update
// (upd_valid / upd_entry / upd_val). Granted slots are emptied. Products that
// collide on a bank therefore take extra cycles; in_ready is high only when
// no slot will still be pending after this cycle, so the multiplier array
// stalls while conflicts are resolved. conflict is high in a cycle where
// pending products lose arbitration; busy is high while any slot is pending.
// The paper names an "arbitrated xbar" with 16 inputs and 32 outputs; the
// fixed-priority policy and the batch-at-a-time acceptance are this
// design's choices.
module scatter_xbar
  import scnn_pkg::*;
#(
  parameter int N  = F * I,
  parameter int NB = A
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  output logic                         in_ready,
  input  logic [N-1:0]                 in_pv,
  input  logic [N-1:0][$clog2(NB)-1:0] in_bank,
  input  logic [N-1:0][ENTRY_W-1:0]    in_entry,
  input  logic [N-1:0][ACC_W-1:0]      in_val,
  output logic [NB-1:0]                upd_valid,
  output logic [NB-1:0][ENTRY_W-1:0]   upd_entry,
  output logic [NB-1:0][ACC_W-1:0]     upd_val,
  output logic                         conflict,
  output logic                         busy
);
  logic [N-1:0]                 pend;
  logic [N-1:0][$clog2(NB)-1:0] s_bank;
  logic [N-1:0][ENTRY_W-1:0]    s_entry;
  logic [N-1:0][ACC_W-1:0]      s_val;
  logic [N-1:0]                 grant;

  always_comb begin
    grant     = '0;
    upd_valid = '0;
    upd_entry = '0;
    upd_val   = '0;
    for (int b = 0; b < NB; b++) begin
      for (int n = N - 1; n >= 0; n--) begin
        if (pend[n] && s_bank[n] == $clog2(NB)'(b)) begin
          upd_valid[b] = 1'b1;
          upd_entry[b] = s_entry[n];
          upd_val[b]   = s_val[n];
        end
      end
    end
    // The lowest pending slot of each bank wins.
    for (int n = 0; n < N; n++) begin
      logic taken;
      taken = 1'b0;
      for (int m = 0; m < n; m++)
        if (pend[m] && s_bank[m] == s_bank[n]) taken = 1'b1;
      grant[n] = pend[n] && !taken;
    end
  end

  assign in_ready = ((pend & ~grant) == '0);
  assign conflict = !in_ready;
  assign busy     = (pend != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend <= '0;
    end else if (in_valid && in_ready) begin
      pend <= in_pv;
    end else begin
      pend <= pend & ~grant;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      s_bank  <= in_bank;
      s_entry <= in_entry;
      s_val   <= in_val;
    end
  end

  // Every update goes to exactly one bank and no product is lost.
  a_progress: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> (grant != '0));
endmodule
