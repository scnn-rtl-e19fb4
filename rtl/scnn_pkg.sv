// scnn_pkg: types and constants shared by the SCNN accelerator.
//
// Numbers that follow the paper's main configuration: 16-bit multiplier
// operands, 24-bit accumulators, a 4x4 (F x I) multiplier array per PE,
// 32 accumulator banks of 32 entries, a 50-entry weight FIFO, 4-bit
// run-length indices, 8x8 PEs. Choices of this design: the Q8.8 / Q16.8
// fixed-point format (FRAC), the per-lane valid mask and last flag that
// travel with every weight vector, and the widths of the layer
// configuration fields.
package scnn_pkg;

  localparam int DATA_W       = 16;  // multiplier operand width
  localparam int ACC_W        = 24;  // accumulator width
  localparam int IDX_W        = 4;   // run-length index: zeros before a value
  localparam int FRAC         = 8;   // fraction bits of an operand (Q8.8)
  localparam int F            = 4;   // weights per vector
  localparam int I            = 4;   // activations per vector
  localparam int A            = 32;  // accumulator banks
  localparam int BANK_ENTRIES = 32;  // entries per bank (per buffer set)
  localparam int ACC_ADDR_W   = $clog2(A * BANK_ENTRIES);  // 10
  localparam int BANK_W       = $clog2(A);
  localparam int ENTRY_W      = $clog2(BANK_ENTRIES);
  localparam int POS_W        = 11;  // linear position inside a block
  localparam int CH_W         = 10;  // channel number (up to 1024 channels)
  localparam int CNT_W        = 11;  // entries in one channel block
  localparam int ACT_WORDS    = 1280; // 10 KB of 16-bit values, I per word
  localparam int ACT_ADDR_W   = $clog2(ACT_WORDS);
  localparam int MAX_CH       = 1024;
  localparam int WFIFO_DEPTH  = 50;
  localparam int NDIR         = 8;   // neighbour directions

  // One compressed element: a value and the number of zeros before it.
  typedef struct packed {
    logic signed [DATA_W-1:0] val;
    logic [IDX_W-1:0]         run;
  } sp_elem_t;

  // One weight-FIFO entry: F compressed weights plus sideband.
  typedef struct packed {
    logic                last;   // last vector of the channel's block
    logic [F-1:0]        valid;  // lanes holding an element (prefix)
    sp_elem_t [F-1:0]    e;
  } wvec_t;

  // One activation-RAM word: I compressed activations.
  typedef sp_elem_t [I-1:0] avec_t;

  // Shape of the layer being computed, per PE tile.
  typedef struct packed {
    logic [CH_W-1:0] num_c;      // input channels C
    logic [CH_W-1:0] num_groups; // output-channel groups K/Kc
    logic [4:0]      kc;         // output channels per group Kc
    logic [3:0]      r;          // filter width R  (x)
    logic [3:0]      s;          // filter height S (y)
    logic [5:0]      wt;         // tile width Wt
    logic [5:0]      ht;         // tile height Ht
    logic            relu;       // apply ReLU in the PPU
  } layer_cfg_t;

  // Halo partial sum travelling to a neighbouring PE.
  // Directions: 0 N (row-1), 1 NE, 2 E (col+1), 3 SE, 4 S, 5 SW, 6 W, 7 NW.
  typedef struct packed {
    logic                  valid;
    logic [2:0]            dir;
    logic [ACC_ADDR_W-1:0] addr;  // accumulator address at the receiver
    logic [ACC_W-1:0]      val;
  } halo_msg_t;

  // Per-PE event counters.
  typedef struct packed {
    logic [31:0] busy_cycles;      // cycles with a product batch issued
    logic [31:0] xbar_stalls;      // cycles a batch waited on bank conflicts
    logic [31:0] barrier_cycles;   // cycles waiting at the group barrier
    logic [31:0] halo_sent;        // halo partial sums sent
    logic [31:0] halo_recv;        // halo partial sums received
    logic [31:0] placeholders;     // zero placeholders written by the PPU
    logic [31:0] overlap_cycles;   // PPU draining while the PE computes
  } pe_stats_t;

endpackage
