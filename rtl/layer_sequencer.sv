// layer_sequencer: controller of the PE array for one layer at a time.
//
// start (with cfg) begins a layer: the sequencer latches the configuration,
// pulses layer_start to every PE and from then on forwards the weight stream
// from the memory side to all PEs at once: a weight vector is taken from
// w_in when every PE's weight FIFO can accept it (broadcast, ready = AND of
// all PE readies). At every output-channel group boundary it holds the
// global barrier: when all PEs report group_done and all PPUs are idle it
// pulses barrier_release for one cycle, so all PEs swap accumulator sets
// and start their PPUs (and their halo exchange) in the same cycle. After
// the last group's release it waits for the PPUs to finish, toggles ram_sel
// (the IARAM and OARAM of every PE swap roles, so the layer's output becomes
// the next layer's input) and pulses done.
// barrier_wait counts cycles in which some, but not all, PEs wait at the
// barrier (load imbalance between PEs).
// w_out_data is w_in_data wired through unregistered: the broadcast adds
// no pipeline stage, only the valid/ready gating.
// The sequencer and the weight broadcast are named by the paper; the
// handshakes are this design's.
module layer_sequencer
  import scnn_pkg::*;
#(
  parameter int N_PE = 64
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  layer_cfg_t      cfg_in,
  output layer_cfg_t      cfg,
  output logic            busy,
  output logic            done,
  output logic            layer_start,
  output logic            ram_sel,
  // weights from the memory side
  input  logic            w_in_valid,
  output logic            w_in_ready,
  input  wvec_t           w_in_data,
  // broadcast to the PEs
  output logic            w_out_valid,
  input  logic [N_PE-1:0] w_out_ready,
  output wvec_t           w_out_data,
  // barrier
  input  logic [N_PE-1:0] pe_group_done,
  input  logic [N_PE-1:0] pe_ppu_idle,
  output logic            barrier_release,
  output logic [31:0]     barrier_wait,
  output logic [31:0]     groups_done
);
  typedef enum logic [1:0] {Q_IDLE, Q_RUN, Q_HOLD, Q_FINAL} qstate_t;
  qstate_t st;
  logic [CH_W-1:0] g;
  logic [1:0]      hold;

  wire all_done = &pe_group_done;
  wire all_idle = &pe_ppu_idle;

  assign busy        = (st != Q_IDLE);
  assign w_out_valid = (st != Q_IDLE) && w_in_valid && (&w_out_ready);
  assign w_in_ready  = (st != Q_IDLE) && (&w_out_ready);
  assign w_out_data  = w_in_data;
  assign barrier_release = (st == Q_RUN) && all_done && all_idle;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= Q_IDLE; g <= '0; hold <= '0; cfg <= '0; done <= 1'b0;
      layer_start <= 1'b0; ram_sel <= 1'b0; barrier_wait <= '0;
      groups_done <= '0;
    end else begin
      done        <= 1'b0;
      layer_start <= 1'b0;
      if (st == Q_RUN && (pe_group_done != '0) && !all_done)
        barrier_wait <= barrier_wait + 1;
      unique case (st)
        Q_IDLE: if (start) begin
          cfg <= cfg_in; g <= '0; layer_start <= 1'b1; st <= Q_HOLD;
          hold <= 2'd2;
        end
        Q_RUN: if (barrier_release) begin
          g <= g + 1'b1;
          groups_done <= groups_done + 1;
          hold <= 2'd2;
          st <= (g == cfg.num_groups - 1'b1) ? Q_FINAL : Q_HOLD;
        end
        Q_HOLD: begin  // let PE and PPU status settle after a pulse
          hold <= hold - 1'b1;
          if (hold == 2'd1) st <= Q_RUN;
        end
        Q_FINAL: begin
          if (hold != '0) hold <= hold - 1'b1;
          else if (all_idle) begin
            ram_sel <= !ram_sel; done <= 1'b1; st <= Q_IDLE;
          end
        end
        default: st <= Q_IDLE;
      endcase
    end
  end
endmodule
