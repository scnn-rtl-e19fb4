// acc_bank: one double-buffered accumulator bank.
//
// The bank has an adder and two sets of ENTRIES 24-bit partial sums. The
// set chosen by sel is the active one: an update (upd_valid, upd_entry,
// upd_val) adds the value to the entry in one cycle (read-add-write on
// registers). The other set belongs to the post-processing unit (PPU):
//   rd_entry / rd_data  combinational read
//   rd_clr              clear that entry at the end of the cycle, so the set
//                       is all zero when it becomes active again
//   hadd_*              add a halo partial sum received from a neighbour PE
// The PPU never reads and halo-adds the same entry in one cycle; if it did,
// the clear wins. Additions wrap modulo 2^24.
// Double buffering, the 32 entries and the 24-bit width follow the paper;
// clear-on-read and the wrap-around are this design's choices.
module acc_bank
  import scnn_pkg::*;
#(
  parameter int ENTRIES = BANK_ENTRIES
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       sel,
  input  logic                       upd_valid,
  input  logic [$clog2(ENTRIES)-1:0] upd_entry,
  input  logic [ACC_W-1:0]           upd_val,
  input  logic [$clog2(ENTRIES)-1:0] rd_entry,
  output logic [ACC_W-1:0]           rd_data,
  input  logic                       rd_clr,
  input  logic                       hadd_valid,
  input  logic [$clog2(ENTRIES)-1:0] hadd_entry,
  input  logic [ACC_W-1:0]           hadd_val
);
  logic [ACC_W-1:0] acc [2][ENTRIES];

  assign rd_data = acc[!sel][rd_entry];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < 2; s++)
        for (int e = 0; e < ENTRIES; e++) acc[s][e] <= '0;
    end else begin
      if (upd_valid)
        acc[sel][upd_entry] <= acc[sel][upd_entry] + upd_val;
      if (hadd_valid)
        acc[!sel][hadd_entry] <= acc[!sel][hadd_entry] + hadd_val;
      if (rd_clr)
        acc[!sel][rd_entry] <= '0;
    end
  end
endmodule
