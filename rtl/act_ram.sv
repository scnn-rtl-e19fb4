// act_ram: one compressed-sparse activation RAM of a PE (IARAM or OARAM).
//
// A word holds I activations, each a 16-bit value with its 4-bit run-length
// index, stored side by side as in the paper's PE diagram. The default of
// 1280 words is the paper's 10 KB of 16-bit values per RAM. Every channel's
// compressed block starts on a new word; a separate count table (this
// design's own) keeps the number of stored elements of each channel, so a
// reader knows where a block ends and where the next one starts.
// Both the vector array and the count table have one write port and one
// synchronous read port: data appear on rdata / crdata the cycle after re /
// cre. Which PE unit drives the ports (compute engine, PPU, or the
// activation load/unload ports) is decided in the PE, because the IARAM and
// OARAM roles swap from layer to layer.
module act_ram
  import scnn_pkg::*;
#(
  parameter int WORDS    = ACT_WORDS,
  parameter int CHANNELS = MAX_CH
) (
  input  logic                   clk,
  input  logic                   we,
  input  logic [ACT_ADDR_W-1:0]  waddr,
  input  avec_t                  wdata,
  input  logic                   re,
  input  logic [ACT_ADDR_W-1:0]  raddr,
  output avec_t                  rdata,
  input  logic                   cwe,
  input  logic [CH_W-1:0]        cwch,
  input  logic [CNT_W-1:0]       cwdata,
  input  logic                   cre,
  input  logic [CH_W-1:0]        crch,
  output logic [CNT_W-1:0]       crdata
);
  avec_t            mem [WORDS];
  logic [CNT_W-1:0] cnt [CHANNELS];

  always_ff @(posedge clk) begin
    if (we && 32'(waddr) < WORDS) mem[waddr] <= wdata;
    if (re) rdata <= mem[32'(raddr) < WORDS ? raddr : '0];
  end

  always_ff @(posedge clk) begin
    if (cwe && 32'(cwch) < CHANNELS) cnt[cwch] <= cwdata;
    if (cre) crdata <= cnt[32'(crch) < CHANNELS ? crch : '0];
  end
endmodule
