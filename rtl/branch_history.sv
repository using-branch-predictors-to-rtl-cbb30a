// branch_history: the predictor's global history register, shared by
// branch and neuronal prediction.
//
// Branch mode: each resolved branch shifts its outcome in at bit 0 (bit 0
// is the most recent branch, bit HIST_LEN-1 the oldest). Neuronal mode:
// once per epoch the neuronal FSM loads the whole register with the
// per-neuron firing vector of the epoch that just ended (bit n = neuron n
// fired), which is option (b) of the design with j neurons over k = 1
// epochs. A load wins over a shift in the same cycle.
//
// The register is in the always-on domain together with bank B0. Its
// contents are not saved across mode switches (the design accepts losing
// predictor state when switching). Reset clears it.
//
// Timing: the new value is visible the cycle after shift_en or load_en.
module branch_history #(
  parameter int unsigned HIST_LEN = bp_pkg::HIST_LEN
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                shift_en,
  input  logic                shift_bit,
  input  logic                load_en,
  input  logic [HIST_LEN-1:0] load_val,
  output logic [HIST_LEN-1:0] hist
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        hist <= '0;
    else if (load_en)  hist <= load_val;
    else if (shift_en) hist <= {hist[HIST_LEN-2:0], shift_bit};
  end

endmodule
