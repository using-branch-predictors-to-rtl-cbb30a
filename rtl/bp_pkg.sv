// bp_pkg: constants, types and arithmetic helpers shared by the
// branch/brain perceptron predictor.
//
// The default sizes are those of the evaluated design point: one 1KB
// predictor bank holds 32 perceptrons (one per tracked Purkinje neuron),
// each with 32 8-bit weights over a 32-bit history; the predictor has four
// banks (B0-B3) of which only B0 stays powered in idle mode; four of the
// neurons must fire in the same 10ms epoch for a synchronized event; the
// core runs at 300MHz, so one epoch is 3,000,000 cycles; a synchronized
// event is followed by 500ms (50 epochs) of nominal-mode processing.
//
// Weights are kept in one's complement, as in the original perceptron
// predictor: a negative weight is the bitwise inverse of its magnitude, so
// negating a weight for a history bit of 0 is a plain inversion. The range
// is -(2^(W-1)-1) .. +(2^(W-1)-1); the all-ones pattern ("negative zero")
// reads as 0. The training threshold follows the original perceptron
// predictor: theta = floor(1.93*h + 14), which is 75 for h = 32.
// The bank count, the PC-to-entry mapping, the needle count and the
// activity-buffer address are this design's own choices.
package bp_pkg;

  // ---- sizes of the evaluated configuration ------------------------------
  parameter int unsigned NUM_BANKS      = 4;          // B0..B3
  parameter int unsigned BANK_ENTRIES   = 32;         // perceptrons per bank
  parameter int unsigned HIST_LEN       = 32;         // weights per perceptron (+ bias)
  parameter int unsigned WEIGHT_BITS    = 8;
  parameter int unsigned NUM_NEURONS    = 32;         // tracked Purkinje neurons
  parameter int unsigned NUM_NEEDLES    = 100;        // 10x10 Utah array
  parameter int unsigned SYNC_NEURONS   = 4;          // neurons firing = synchronized
  parameter int unsigned EPOCH_CYCLES   = 3_000_000;  // 10ms at 300MHz
  parameter int unsigned CAPTURE_EPOCHS = 50;         // 500ms after synchronization
  parameter int unsigned THETA          = 75;         // floor(1.93*32 + 14)
  parameter logic [31:0] ACT_BUF_BASE   = 32'h2000_0000;

  // Width of a perceptron output y for h weights of w bits plus the bias:
  // |y| <= (h+1)*(2^(w-1)-1), so w + clog2(h+1) + 1 bits always suffice.
  function automatic int unsigned sum_bits(int unsigned h, int unsigned w);
    return w + $clog2(h + 1) + 1;
  endfunction

  // Predictor operating mode, chosen by the power-mode controller.
  typedef enum logic {
    MODE_BRANCH   = 1'b0,  // nominal: ordinary branch prediction
    MODE_NEURONAL = 1'b1   // idle: neuronal FSM owns bank B0
  } bp_mode_e;

  // Outcome classes of one idle-mode epoch (the four cases of the design).
  typedef enum logic [1:0] {
    EV_NOSYNC_OK  = 2'd0,  // correctly predicted non-synchronization
    EV_SYNC_OK    = 2'd1,  // correctly predicted synchronization
    EV_SYNC_MISS  = 2'd2,  // synchronization that was not predicted
    EV_SYNC_FALSE = 2'd3   // synchronization predicted but absent
  } sync_event_e;

endpackage
