// tb_perceptron_predictor: self-checking test of the banked predictor with
// 4 banks of 4 perceptrons, 6 history bits, 8-bit weights and theta = 14.
// A reference model in the testbench keeps every weight as an integer and
// the history register, and follows the perceptron rules independently.
// Phases: (1) branch mode, predictions checked one cycle after each request
// (y, direction, history snapshot) while random branches train the table,
// including a prediction and an update in the same cycle; (2) neuronal mode
// with only B0 powered: the other banks lose their weights, entries of B0
// are trained with neuron outcomes, the history is loaded and per-neuron
// predictions are checked; CPU ports are ignored; (3) branch mode again:
// B1-B3 restart from zero weights, B0 keeps what neuronal training left.
module tb_perceptron_predictor;
  import bp_pkg::*;
  localparam int NB = 4, E = 4, H = 6, W = 8, TH = 14, SW = 8 + 3 + 1;

  logic clk = 0, rst_n = 0;
  bp_mode_e mode = MODE_BRANCH;
  logic [NB-1:0] bank_pwr = '1;
  logic br_req_valid = 0, br_rsp_valid, br_rsp_taken;
  logic [31:0] br_req_pc = 0, br_upd_pc = 0;
  logic signed [SW-1:0] br_rsp_y, nr_y;
  logic [H-1:0] br_rsp_hist, br_upd_hist = '0, nr_hist_val = '0, hist;
  logic br_upd_valid = 0, br_upd_taken = 0;
  logic nr_valid = 0, nr_train = 0, nr_outcome = 0, nr_pred, nr_trained, nr_hist_load = 0;
  logic [1:0] nr_entry = 0;

  perceptron_predictor #(.NUM_BANKS(NB), .ENTRIES(E), .HIST_LEN(H), .WEIGHT_BITS(W),
                         .THETA(TH)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, trains = 0;
  int rw [NB][E][H+1];
  logic [H-1:0] rh;

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  function automatic int ref_y(int b, int e, logic [H-1:0] h);
    int s = rw[b][e][0];
    for (int i = 1; i <= H; i++) s += h[i-1] ? rw[b][e][i] : -rw[b][e][i];
    return s;
  endfunction

  function automatic void ref_train(int b, int e, logic [H-1:0] h, bit t);
    int s = ref_y(b, e, h);
    if (((s >= 0) != t) || (s <= TH && s >= -TH)) begin
      trains++;
      for (int i = 0; i <= H; i++) begin
        int x = (i == 0) ? 1 : (h[i-1] ? 1 : -1);
        rw[b][e][i] += (t ? 1 : -1) * x;
        if (rw[b][e][i] > 127) rw[b][e][i] = 127;
        if (rw[b][e][i] < -127) rw[b][e][i] = -127;
      end
    end
  endfunction

  function automatic int bank_of(logic [31:0] pc); return int'(pc[4:3]); endfunction
  function automatic int ent_of(logic [31:0] pc);  return int'(pc[2:1]); endfunction

  // predict pc (and optionally resolve upc in the same cycle)
  task automatic predict(logic [31:0] pc, bit also_upd, logic [31:0] upc, bit ut, logic [H-1:0] uh);
    int ey; logic [H-1:0] eh;
    ey = ref_y(bank_of(pc), ent_of(pc), rh);
    eh = rh;
    @(negedge clk);
    br_req_valid = 1; br_req_pc = pc;
    br_upd_valid = also_upd; br_upd_pc = upc; br_upd_taken = ut; br_upd_hist = uh;
    @(negedge clk);
    br_req_valid = 0; br_upd_valid = 0;
    if (also_upd) begin ref_train(bank_of(upc), ent_of(upc), uh, ut); rh = {rh[H-2:0], ut}; end
    chk("rsp_valid", int'(br_rsp_valid), 1);
    chk("rsp_y", int'(br_rsp_y), ey);
    chk("rsp_taken", int'(br_rsp_taken), int'(ey >= 0));
    chk("rsp_hist", int'(br_rsp_hist), int'(eh));
  endtask

  task automatic resolve(logic [31:0] pc, bit t, logic [H-1:0] h);
    @(negedge clk);
    br_upd_valid = 1; br_upd_pc = pc; br_upd_taken = t; br_upd_hist = h;
    @(negedge clk);
    br_upd_valid = 0;
    ref_train(bank_of(pc), ent_of(pc), h, t);
    rh = {rh[H-2:0], t};
    chk("history after resolve", int'(hist), int'(rh));
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] pc;
    logic [NB-1:0] o;
    foreach (rw[b, e, i]) rw[b][e][i] = 0;
    rh = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // ---- phase 1: branch mode -------------------------------------------
    for (int t = 0; t < 300; t++) begin
      pc = 32'($urandom_range(0, 31)) << 1;
      predict(pc, 0, 0, 0, '0);
      // outcome correlated with history so that training converges
      resolve(pc, rh[0] ^ pc[3] ^ ($urandom_range(0, 9) == 0), rh);
    end
    for (int t = 0; t < 50; t++) begin
      pc = 32'($urandom_range(0, 31)) << 1;
      predict(pc, 1, 32'($urandom_range(0, 31)) << 1, $urandom_range(0, 1), $urandom);
    end
    // ---- phase 2: neuronal mode, only B0 on --------------------------------
    @(negedge clk);
    mode = MODE_NEURONAL; bank_pwr = 4'b0001;
    for (int b = 1; b < NB; b++) foreach (rw[b][e, i]) rw[b][e][i] = 0;
    for (int ep = 0; ep < 20; ep++) begin
      o = $urandom;
      // CPU requests must be ignored in neuronal mode
      @(negedge clk);
      br_req_valid = 1; br_upd_valid = 1; br_upd_pc = 0; br_upd_taken = 1;
      @(negedge clk);
      br_req_valid = 0; br_upd_valid = 0;
      chk("no branch response in neuronal mode", int'(br_rsp_valid), 0);
      chk("history untouched by CPU", int'(hist), int'(rh));
      // training with this epoch's outcomes
      for (int n = 0; n < E; n++) begin
        int s; bit exp_tr;
        s = ref_y(0, n, rh);
        exp_tr = ((s >= 0) != o[n]) || (s <= TH && s >= -TH);
        @(negedge clk);
        nr_valid = 1; nr_train = 1; nr_entry = 2'(n); nr_outcome = o[n];
        #1 chk("nr_trained", int'(nr_trained), int'(exp_tr));
        @(negedge clk);
        nr_valid = 0; nr_train = 0;
        ref_train(0, n, rh, o[n]);
      end
      // history load
      @(negedge clk);
      nr_hist_load = 1; nr_hist_val = H'(o);
      @(negedge clk);
      nr_hist_load = 0;
      rh = H'(o);
      chk("history loaded", int'(hist), int'(rh));
      // predictions
      for (int n = 0; n < E; n++) begin
        @(negedge clk);
        nr_valid = 1; nr_entry = 2'(n); #1;
        chk("nr_y", int'(nr_y), ref_y(0, n, rh));
        chk("nr_pred", int'(nr_pred), int'(ref_y(0, n, rh) >= 0));
      end
      @(negedge clk); nr_valid = 0;
    end
    // ---- phase 3: back to branch mode ---------------------------------------
    @(negedge clk);
    mode = MODE_BRANCH; bank_pwr = '1;
    for (int t = 0; t < 32; t++) predict(32'(t) << 1, 0, 0, 0, '0);
    chk("training happened", int'(trains > 50), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
