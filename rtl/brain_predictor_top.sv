// brain_predictor_top: branch predictor of an implant processor that also
// predicts synchronized Purkinje-neuron firing, so the processor can sleep
// between synchronized events.
//
// Blocks:
//   epoch_timer          one tick per 10ms epoch (3,000,000 cycles at 300MHz)
//   neuronal_fsm         needle mask, activity-buffer reads, per-epoch
//                        training and prediction on bank B0
//   perceptron_predictor banks B0..B3, history register, lookup/update logic
//   power_mode_ctrl      Idle / Nominal decisions and gate enables
//
// Interfaces (all plain signals):
//   CPU branch port      br_req_* (prediction one cycle later on br_rsp_*)
//                        and br_upd_* (resolved branch with its history
//                        snapshot); used in Nominal mode only.
//   CPU calibration      cfg_we/cfg_mask: the single store that writes the
//                        needle mask.
//   CPU sleep            cpu_sleep_req: the processor has finished its work
//                        and asks to enter Idle.
//   DRAM                 mem_req/mem_addr/mem_ack/mem_rdata: reads of the
//                        activity buffer the ADC writes (word reads,
//                        so mem_addr[1:0] is always 0).
//   Power                cpu_clk_en gates pipeline and cache clocks,
//                        bank_pwr drives the bank power switches (B0 on,
//                        B1..B3 off in Idle).
//   Observation          mode, epoch_done, pred_sync, actual_sync,
//                        pred_vec/outcome_vec (per-neuron prediction and
//                        outcome), ev_valid/ev_kind (epoch classification).
// The core, caches, DRAM, ADC, electrode array and power switches are
// outside this module.
module brain_predictor_top #(
  parameter int unsigned NUM_BANKS      = bp_pkg::NUM_BANKS,
  parameter int unsigned ENTRIES        = bp_pkg::BANK_ENTRIES,
  parameter int unsigned HIST_LEN       = bp_pkg::HIST_LEN,
  parameter int unsigned WEIGHT_BITS    = bp_pkg::WEIGHT_BITS,
  parameter int unsigned THETA          = bp_pkg::THETA,
  parameter int unsigned NUM_NEURONS    = bp_pkg::NUM_NEURONS,
  parameter int unsigned NUM_NEEDLES    = bp_pkg::NUM_NEEDLES,
  parameter int unsigned SYNC_NEURONS   = bp_pkg::SYNC_NEURONS,
  parameter int unsigned EPOCH_CYCLES   = bp_pkg::EPOCH_CYCLES,
  parameter int unsigned CAPTURE_EPOCHS = bp_pkg::CAPTURE_EPOCHS,
  parameter logic [31:0] ACT_BUF_BASE   = bp_pkg::ACT_BUF_BASE,
  localparam int unsigned SUM_W         = bp_pkg::sum_bits(HIST_LEN, WEIGHT_BITS)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // CPU branch prediction
  input  logic                     br_req_valid,
  input  logic [31:0]              br_req_pc,
  output logic                     br_rsp_valid,
  output logic                     br_rsp_taken,
  output logic signed [SUM_W-1:0]  br_rsp_y,
  output logic [HIST_LEN-1:0]      br_rsp_hist,
  input  logic                     br_upd_valid,
  input  logic [31:0]              br_upd_pc,
  input  logic                     br_upd_taken,
  input  logic [HIST_LEN-1:0]      br_upd_hist,
  // CPU calibration store and sleep request
  input  logic                     cfg_we,
  input  logic [NUM_NEEDLES-1:0]   cfg_mask,
  input  logic                     cpu_sleep_req,
  // DRAM activity buffer
  output logic                     mem_req,
  output logic [31:0]              mem_addr,
  input  logic                     mem_ack,
  input  logic [31:0]              mem_rdata,
  // power and clock gating
  output logic                     cpu_clk_en,
  output logic [NUM_BANKS-1:0]     bank_pwr,
  output bp_pkg::bp_mode_e         mode,
  // observation
  output logic                     epoch_done,
  output logic                     pred_sync,
  output logic                     actual_sync,
  output logic [NUM_NEURONS-1:0]   pred_vec,
  output logic [NUM_NEURONS-1:0]   outcome_vec,
  output logic                     ev_valid,
  output bp_pkg::sync_event_e      ev_kind,
  output logic                     nr_trained
);

  localparam int unsigned IDX_W = $clog2(ENTRIES);
  localparam int unsigned CNT_W = $clog2(NUM_NEURONS + 1);

  logic                   tick;
  logic                   nr_valid, nr_train, nr_outcome, nr_pred, nr_hist_load;
  logic [IDX_W-1:0]       nr_entry;
  logic [HIST_LEN-1:0]    nr_hist_val, hist;
  logic signed [SUM_W-1:0] nr_y;
  logic [CNT_W-1:0]       neuron_count;
  logic [NUM_NEEDLES-1:0] mask;
  logic [1:0]             pm_state;

  epoch_timer #(.EPOCH_CYCLES(EPOCH_CYCLES)) u_timer (
    .clk    (clk),
    .rst_n  (rst_n),
    .restart(1'b0),
    .tick   (tick)
  );

  neuronal_fsm #(
    .NUM_NEEDLES (NUM_NEEDLES),
    .NUM_NEURONS (NUM_NEURONS),
    .ENTRIES     (ENTRIES),
    .HIST_LEN    (HIST_LEN),
    .SYNC_NEURONS(SYNC_NEURONS),
    .ACT_BUF_BASE(ACT_BUF_BASE)
  ) u_fsm (
    .clk         (clk),
    .rst_n       (rst_n),
    .mode        (mode),
    .epoch_tick  (tick),
    .cfg_we      (cfg_we),
    .cfg_mask    (cfg_mask),
    .mem_req     (mem_req),
    .mem_addr    (mem_addr),
    .mem_ack     (mem_ack),
    .mem_rdata   (mem_rdata),
    .nr_valid    (nr_valid),
    .nr_entry    (nr_entry),
    .nr_train    (nr_train),
    .nr_outcome  (nr_outcome),
    .nr_pred     (nr_pred),
    .nr_hist_load(nr_hist_load),
    .nr_hist_val (nr_hist_val),
    .epoch_done  (epoch_done),
    .pred_sync   (pred_sync),
    .actual_sync (actual_sync),
    .pred_vec    (pred_vec),
    .outcome_vec (outcome_vec),
    .neuron_count(neuron_count),
    .mask        (mask)
  );

  perceptron_predictor #(
    .NUM_BANKS  (NUM_BANKS),
    .ENTRIES    (ENTRIES),
    .HIST_LEN   (HIST_LEN),
    .WEIGHT_BITS(WEIGHT_BITS),
    .THETA      (THETA)
  ) u_bp (
    .clk         (clk),
    .rst_n       (rst_n),
    .mode        (mode),
    .bank_pwr    (bank_pwr),
    .br_req_valid(br_req_valid),
    .br_req_pc   (br_req_pc),
    .br_rsp_valid(br_rsp_valid),
    .br_rsp_taken(br_rsp_taken),
    .br_rsp_y    (br_rsp_y),
    .br_rsp_hist (br_rsp_hist),
    .br_upd_valid(br_upd_valid),
    .br_upd_pc   (br_upd_pc),
    .br_upd_taken(br_upd_taken),
    .br_upd_hist (br_upd_hist),
    .nr_valid    (nr_valid),
    .nr_entry    (nr_entry),
    .nr_train    (nr_train),
    .nr_outcome  (nr_outcome),
    .nr_pred     (nr_pred),
    .nr_y        (nr_y),
    .nr_trained  (nr_trained),
    .nr_hist_load(nr_hist_load),
    .nr_hist_val (nr_hist_val),
    .hist        (hist)
  );

  power_mode_ctrl #(
    .NUM_BANKS     (NUM_BANKS),
    .CAPTURE_EPOCHS(CAPTURE_EPOCHS)
  ) u_pm (
    .clk          (clk),
    .rst_n        (rst_n),
    .epoch_done   (epoch_done),
    .pred_sync    (pred_sync),
    .actual_sync  (actual_sync),
    .cpu_sleep_req(cpu_sleep_req),
    .mode         (mode),
    .cpu_clk_en   (cpu_clk_en),
    .bank_pwr     (bank_pwr),
    .ev_valid     (ev_valid),
    .ev_kind      (ev_kind),
    .pm_state     (pm_state)
  );

endmodule
