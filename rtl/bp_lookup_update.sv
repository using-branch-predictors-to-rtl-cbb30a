// bp_lookup_update: the combinational "lookup + update" logic of the
// perceptron predictor, shared by branch and neuronal prediction.
//
// Lookup: y = w0 + sum_{i=1..h} x_i * w_i, where w0 is the bias weight and
// x_i is derived from history bit i-1. The prediction is "taken / fires"
// when y >= 0 and "not taken / quiet" when y < 0 (the rule printed in the
// perceptron figure; the running text instead says "non-zero", which would
// predict firing for every negative sum, so the figure's rule is used).
//
// History encoding (parameter BIPOLAR): with BIPOLAR = 1 (default) a
// history bit of 1 counts as x = +1 and a bit of 0 as x = -1, as in the
// conventional perceptron branch predictor the design builds on; the
// training rule "increment w_i when the outcome agrees with x_i, otherwise
// decrement" is stated in that form. With BIPOLAR = 0 a history bit of 0
// contributes nothing (x = 0), which is how the worked example in the
// perceptron figure multiplies the history bits.
//
// Update: training is needed when the prediction disagrees with the
// outcome or |y| <= THETA. Each weight then moves by one towards agreement
// (the bias towards the outcome), saturating at +/-(2^(W-1)-1). Weights are
// in one's complement (see bp_pkg). The caller decides whether to write
// new_weights back (it does so when need_train is set).
//
// Timing: purely combinational. A real implementation would use a Wallace
// tree; the sum here is written as a loop and left to synthesis.
module bp_lookup_update #(
  parameter int unsigned HIST_LEN    = bp_pkg::HIST_LEN,
  parameter int unsigned WEIGHT_BITS = bp_pkg::WEIGHT_BITS,
  parameter int unsigned THETA       = bp_pkg::THETA,
  parameter bit          BIPOLAR     = 1'b1,
  localparam int unsigned SUM_W      = bp_pkg::sum_bits(HIST_LEN, WEIGHT_BITS)
) (
  input  logic [HIST_LEN:0][WEIGHT_BITS-1:0] weights,
  input  logic [HIST_LEN-1:0]                hist,
  input  logic                               outcome,
  output logic signed [SUM_W-1:0]            y,
  output logic                               pred,
  output logic                               need_train,
  output logic [HIST_LEN:0][WEIGHT_BITS-1:0] new_weights
);

  localparam int WMAX = (1 << (WEIGHT_BITS - 1)) - 1;

  // One's complement weight to a signed value of the sum's width.
  function automatic logic signed [SUM_W-1:0] w2s(logic [WEIGHT_BITS-1:0] w);
    logic [WEIGHT_BITS-1:0] mag;
    mag = w[WEIGHT_BITS-1] ? ~w : w;
    return w[WEIGHT_BITS-1] ? -$signed({{(SUM_W-WEIGHT_BITS){1'b0}}, mag})
                            :  $signed({{(SUM_W-WEIGHT_BITS){1'b0}}, mag});
  endfunction

  // Signed value (already within range) to one's complement.
  function automatic logic [WEIGHT_BITS-1:0] s2w(int v);
    logic [WEIGHT_BITS-1:0] mag;
    mag = (v < 0) ? WEIGHT_BITS'(-v) : WEIGHT_BITS'(v);
    return (v < 0) ? ~mag : mag;
  endfunction

  logic signed [SUM_W-1:0] abs_y;

  always_comb begin
    y = w2s(weights[0]);
    for (int i = 1; i <= HIST_LEN; i++) begin
      if (hist[i-1])    y = y + w2s(weights[i]);
      else if (BIPOLAR) y = y - w2s(weights[i]);
    end
    pred       = ~y[SUM_W-1];
    abs_y      = y[SUM_W-1] ? -y : y;
    need_train = (pred != outcome) || (abs_y <= $signed(SUM_W'(THETA)));
  end

  always_comb begin
    int   v;
    logic agree;
    for (int i = 0; i <= HIST_LEN; i++) begin
      v     = int'(w2s(weights[i]));
      agree = (i == 0) ? outcome : (outcome == hist[i-1]);
      if (agree) begin
        if (v < WMAX)  v = v + 1;
      end else begin
        if (v > -WMAX) v = v - 1;
      end
      new_weights[i] = s2w(v);
    end
  end

endmodule
