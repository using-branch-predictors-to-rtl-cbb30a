// sync_detector: decides whether a neuron vector is a synchronized event.
//
// Counts the set bits of `fire` among the neurons enabled by `valid` and
// raises `sync` when at least `threshold` of them are set. The design uses
// it twice: on the per-neuron predictions (is the next epoch predicted to
// be synchronized?) and on the per-neuron outcomes read from the activity
// buffer (was the epoch that just ended synchronized?). The threshold is a
// run-time input so that the experimenter's choice (2, 4, 8 or 10 neurons
// in the evaluation; 4 by default) can be set without rebuilding.
//
// Timing: purely combinational.
module sync_detector #(
  parameter int unsigned N     = bp_pkg::NUM_NEURONS,
  localparam int unsigned CNT_W = $clog2(N + 1)
) (
  input  logic [N-1:0]     fire,
  input  logic [N-1:0]     valid,
  input  logic [CNT_W-1:0] threshold,
  output logic [CNT_W-1:0] count,
  output logic             sync
);

  always_comb begin
    count = '0;
    for (int i = 0; i < N; i++) count = count + CNT_W'(fire[i] & valid[i]);
    sync = (count >= threshold);
  end

endmodule
