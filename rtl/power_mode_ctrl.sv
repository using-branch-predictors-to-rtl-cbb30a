// power_mode_ctrl: decides when the processor is in Idle (clock-gated
// pipeline and caches, predictor bank B0 doing neuronal prediction) and
// when it is in Nominal operation (everything on, ordinary branch
// prediction).
//
// It acts on the neuronal FSM's epoch_done pulse, which carries the
// outcome of the epoch that just ended (actual_sync) and, in Idle, the
// prediction for the next epoch (pred_sync):
//   ST_BOOT     Nominal after reset so the processor can boot and write the
//               needle mask; goes to Idle on cpu_sleep_req.
//   ST_IDLE     An unpredicted synchronization in the epoch just ended
//               (EV_SYNC_MISS) wakes the processor at once into ST_CAPTURE:
//               the lead-up activity of that epoch is lost. Otherwise the
//               epoch was a correctly predicted non-synchronization
//               (EV_NOSYNC_OK) and, if the next epoch is predicted to be
//               synchronized, the processor is woken early into
//               ST_WAKE_PRED so it also sees the lead-up epoch.
//   ST_WAKE_PRED Nominal. At the end of the predicted epoch: synchronized
//               (EV_SYNC_OK) -> ST_CAPTURE; not synchronized
//               (EV_SYNC_FALSE) -> back to ST_IDLE.
//   ST_CAPTURE  Nominal while the processor handles the 500ms
//               (CAPTURE_EPOCHS epochs) of activity after the
//               synchronization. Processing may take longer than 500ms, so
//               the controller returns to Idle only when the window has
//               passed and the processor has asked to sleep (cpu_sleep_req,
//               remembered if it comes early).
// Outputs: cpu_clk_en (pipeline and cache clock enable), bank_pwr (power
// switch enables; only B0 in Idle), mode for the predictor and the FSM, and
// a one-cycle ev_valid/ev_kind report per classified epoch.
//
// Timing: state changes one cycle after epoch_done; the microsecond-scale
// wake-up of the core is not modelled (it is far shorter than an epoch).
// The four cases, the immediate wake on a missed synchronization, the
// return to Idle on a false one and the 500ms window follow the paper; the
// boot state and the sleep-request handshake are this design's choices.
module power_mode_ctrl #(
  parameter int unsigned NUM_BANKS      = bp_pkg::NUM_BANKS,
  parameter int unsigned CAPTURE_EPOCHS = bp_pkg::CAPTURE_EPOCHS,
  localparam int unsigned CW            = $clog2(CAPTURE_EPOCHS + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    epoch_done,
  input  logic                    pred_sync,
  input  logic                    actual_sync,
  input  logic                    cpu_sleep_req,
  output bp_pkg::bp_mode_e        mode,
  output logic                    cpu_clk_en,
  output logic [NUM_BANKS-1:0]    bank_pwr,
  output logic                    ev_valid,
  output bp_pkg::sync_event_e     ev_kind,
  output logic [1:0]              pm_state
);

  import bp_pkg::*;

  typedef enum logic [1:0] {
    ST_BOOT      = 2'd0,
    ST_IDLE      = 2'd1,
    ST_WAKE_PRED = 2'd2,
    ST_CAPTURE   = 2'd3
  } pm_state_e;

  pm_state_e     state;
  logic [CW-1:0] win;
  logic          sleep_pending;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= ST_BOOT;
      win           <= '0;
      sleep_pending <= 1'b0;
      ev_valid      <= 1'b0;
      ev_kind       <= EV_NOSYNC_OK;
    end else begin
      ev_valid <= 1'b0;
      unique case (state)
        ST_BOOT: begin
          if (cpu_sleep_req) state <= ST_IDLE;
        end
        ST_IDLE: begin
          if (epoch_done) begin
            ev_valid <= 1'b1;
            if (actual_sync) begin
              ev_kind       <= EV_SYNC_MISS;
              state         <= ST_CAPTURE;
              win           <= '0;
              sleep_pending <= 1'b0;
            end else begin
              ev_kind <= EV_NOSYNC_OK;
              if (pred_sync) state <= ST_WAKE_PRED;
            end
          end
        end
        ST_WAKE_PRED: begin
          if (epoch_done) begin
            ev_valid <= 1'b1;
            if (actual_sync) begin
              ev_kind       <= EV_SYNC_OK;
              state         <= ST_CAPTURE;
              win           <= '0;
              sleep_pending <= 1'b0;
            end else begin
              ev_kind <= EV_SYNC_FALSE;
              state   <= ST_IDLE;
            end
          end
        end
        ST_CAPTURE: begin
          if (epoch_done && win != CW'(CAPTURE_EPOCHS)) win <= win + 1'b1;
          if (cpu_sleep_req) sleep_pending <= 1'b1;
          if (win == CW'(CAPTURE_EPOCHS) && (sleep_pending || cpu_sleep_req)) begin
            state         <= ST_IDLE;
            sleep_pending <= 1'b0;
          end
        end
        default: state <= ST_BOOT;
      endcase
    end
  end

  always_comb begin
    cpu_clk_en = (state != ST_IDLE);
    mode       = (state == ST_IDLE) ? MODE_NEURONAL : MODE_BRANCH;
    bank_pwr   = (state == ST_IDLE) ? NUM_BANKS'(1) : '1;
    pm_state   = state;
  end

endmodule
