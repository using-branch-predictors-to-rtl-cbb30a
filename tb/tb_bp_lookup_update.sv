// tb_bp_lookup_update: self-checking test of the perceptron lookup/update
// logic. Instance 1 runs the default configuration (32 weights of 8 bits,
// bipolar history, theta = 75) against a reference model computed with
// integers from random weights, histories and outcomes, plus corner cases
// at the saturation limits. Instance 2 reproduces the worked example of the
// perceptron figure: 2-bit weights, entry 00|00|11|01|01 (bias first),
// history 0011 with 0/1 history values, giving y = 2, "predict fire".
module tb_bp_lookup_update;
  localparam int H = 32, W = 8, TH = 75, SW = 15;
  localparam int WMAX = 127;

  logic [H:0][W-1:0] weights;
  logic [H-1:0]      hist;
  logic              outcome;
  logic signed [SW-1:0] y;
  logic              pred, need_train;
  logic [H:0][W-1:0] new_weights;
  int checks = 0, failures = 0;

  bp_lookup_update #(.HIST_LEN(H), .WEIGHT_BITS(W), .THETA(TH)) dut (.*);

  // figure example instance
  logic [4:0][1:0] fw, fnw;
  logic [3:0]      fh;
  logic signed [2+3+1-1:0] fy;
  logic            fpred, ftrain;
  bp_lookup_update #(.HIST_LEN(4), .WEIGHT_BITS(2), .THETA(0), .BIPOLAR(1'b0)) dut_fig (
    .weights(fw), .hist(fh), .outcome(1'b1), .y(fy), .pred(fpred),
    .need_train(ftrain), .new_weights(fnw));

  function automatic int dec(logic [W-1:0] w);   // one's complement decode
    logic [W-1:0] m;
    m = ~w;
    if (w[W-1]) return -int'(m);
    return int'(w);
  endfunction
  function automatic logic [W-1:0] enc(int v);
    return v < 0 ? ~W'(-v) : W'(v);
  endfunction

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic run_one();
    int s, x, v, nv, exp_pred, exp_train;
    s = dec(weights[0]);
    for (int i = 1; i <= H; i++) s += (hist[i-1] ? 1 : -1) * dec(weights[i]);
    #1;
    chk("y", int'(y), s);
    exp_pred  = (s >= 0);
    exp_train = (exp_pred != int'(outcome)) || (s <= TH && s >= -TH);
    chk("pred", int'(pred), exp_pred);
    chk("need_train", int'(need_train), exp_train);
    for (int i = 0; i <= H; i++) begin
      v = dec(weights[i]);
      x = (i == 0) ? 1 : (hist[i-1] ? 1 : -1);
      nv = v + ((outcome ? 1 : -1) * x);
      if (nv > WMAX) nv = WMAX;
      if (nv < -WMAX) nv = -WMAX;
      checks++;
      if (dec(new_weights[i]) != nv) begin
        failures++;
        $display("FAIL new weight %0d: got %0d expected %0d", i, dec(new_weights[i]), nv);
      end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // worked example from the perceptron figure
    fw = {2'b01, 2'b01, 2'b11, 2'b00, 2'b00};  // w4 w3 w2 w1 w0
    fh = 4'b1100;                                // x1=0 x2=0 x3=1 x4=1
    #1;
    chk("figure y", int'(fy), 2);
    chk("figure pred", int'(fpred), 1);
    // random small weights (sums cross zero and theta often)
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i <= H; i++) weights[i] = enc($signed($urandom_range(0, 16)) - 8);
      hist = $urandom; outcome = $urandom_range(0, 1);
      run_one();
    end
    // random full-range weights
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i <= H; i++) weights[i] = enc($signed($urandom_range(0, 254)) - 127);
      hist = $urandom; outcome = $urandom_range(0, 1);
      run_one();
    end
    // saturation corners, including negative zero (all ones)
    for (int i = 0; i <= H; i++) weights[i] = enc(127);
    hist = '1; outcome = 1; run_one();
    for (int i = 0; i <= H; i++) weights[i] = enc(-127);
    hist = '1; outcome = 0; run_one();
    for (int i = 0; i <= H; i++) weights[i] = '1;
    hist = 32'h0F0F_0F0F; outcome = 0; run_one();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
