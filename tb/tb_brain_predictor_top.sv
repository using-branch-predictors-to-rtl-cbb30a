// tb_brain_predictor_top: end-to-end test of the branch/brain predictor.
//
// The design runs at its default sizes (4 banks of 32 perceptrons with 32
// 8-bit weights, 100 needles, 32 neurons, 4 neurons for synchronization)
// except for time: an epoch is 200 cycles instead of 3,000,000 and the
// capture window 5 epochs instead of 50.
//
// The testbench plays the processor, the DRAM and the recording front end:
//  * CPU: after reset it stores the needle mask (every third needle is a
//    neuron) and asks to sleep; whenever its clock is enabled it issues
//    branch predictions and updates (to banks B1..B3) and asks to sleep
//    every 150 cycles.
//  * Activity: a synthetic micro-band. Neurons fire at random with
//    probability 1/32 per epoch; now and then a lead-up epoch (neurons 0
//    and 1 fire) is followed by a synchronized epoch (neurons 0..5 fire);
//    some lead-ups are not followed by synchronization. Needles that are
//    not neurons carry random noise, which the mask must hide.
//  * DRAM: the activity buffer is rewritten after every epoch_done and
//    answered with a random 0-3 cycle latency.
// Checks against the testbench's own bookkeeping: every epoch's outcome
// vector and actual_sync; Idle/Nominal decisions at each epoch boundary
// (wake on a predicted or a missed synchronization, stay idle otherwise,
// return to Idle after a false prediction); the gate enables in Idle (only
// B0 powered, CPU clock off); branch responses only in Nominal mode.
// Mechanisms that must each happen at least once: correct non-sync, correct
// sync, missed sync, false sync, perceptron training, early wake-up, return
// to Idle after a capture, sleep request held until the window ends, bank
// power-down, branch prediction.
module tb_brain_predictor_top;
  import bp_pkg::*;
  localparam int EC = 200, CAP = 5, NN = 100, NR = 32, H = 32, SW = 15;
  localparam logic [31:0] BASE = 32'h2000_0000;

  logic clk = 0, rst_n = 0;
  logic br_req_valid = 0, br_rsp_valid, br_rsp_taken, br_upd_valid = 0, br_upd_taken = 0;
  logic [31:0] br_req_pc = 0, br_upd_pc = 0;
  logic signed [SW-1:0] br_rsp_y;
  logic [H-1:0] br_rsp_hist, br_upd_hist = '0;
  logic cfg_we = 0, cpu_sleep_req = 0;
  logic [NN-1:0] cfg_mask = '0;
  logic mem_req, mem_ack = 0;
  logic [31:0] mem_addr, mem_rdata = '0;
  logic cpu_clk_en;
  logic [3:0] bank_pwr;
  bp_mode_e mode;
  logic epoch_done, pred_sync, actual_sync, ev_valid, nr_trained;
  logic [NR-1:0] pred_vec, outcome_vec;
  sync_event_e ev_kind;

  brain_predictor_top #(.EPOCH_CYCLES(EC), .CAPTURE_EPOCHS(CAP)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  // ---- recording front end and DRAM -------------------------------------------
  logic [127:0]  buffer;      // activity buffer, 4 words
  logic [NR-1:0] cur_neurons; // neuron vector stored in the buffer
  logic [NN-1:0] the_mask;
  int            leadup_next; // 1: next epoch is synchronized

  function automatic logic [NN-1:0] make_mask();
    logic [NN-1:0] m = '0;
    for (int i = 0; i < NR; i++) m[3 * i] = 1'b1;
    return m;
  endfunction

  task automatic new_epoch_activity();
    logic [NR-1:0] v;
    v = '0;
    for (int i = 0; i < NR; i++) v[i] = ($urandom_range(0, 31) == 0);
    if (leadup_next == 1) begin
      v[5:0] = 6'h3F;
      leadup_next = 0;
    end else if ($urandom_range(0, 5) == 0) begin
      v = '0; v[1:0] = 2'b11;
      leadup_next = ($urandom_range(0, 9) != 0) ? 1 : 0;
    end
    cur_neurons = v;
    buffer = {$urandom, $urandom, $urandom, $urandom};
    for (int i = 0; i < NR; i++) buffer[3 * i] = v[i];
  endtask

  always @(posedge clk) begin
    if (mem_req && !mem_ack && $urandom_range(0, 2) == 0) begin
      mem_ack   <= 1;
      mem_rdata <= buffer[(mem_addr - BASE) * 8 +: 32];
    end else mem_ack <= 0;
  end

  // ---- counters of mechanisms -------------------------------------------------
  int n_ev [4] = '{0, 0, 0, 0};
  int n_train = 0, n_wake_pred = 0, n_back_idle = 0, n_held = 0, n_gated = 0, n_brsp = 0;
  int n_epochs = 0, ok_half = 0, miss_half = 0;

  bit idle_q = 0;   // processor was idle in the previous cycle
  always @(posedge clk) if (rst_n) begin
    idle_q <= !cpu_clk_en;
    if (ev_valid) n_ev[ev_kind]++;
    if (nr_trained) n_train++;
    if (br_rsp_valid) n_brsp++;
    if (!cpu_clk_en) begin
      n_gated++;
      if (bank_pwr != 4'b0001) begin failures++; $display("FAIL bank power in idle %b", bank_pwr); end
      if (mode != MODE_NEURONAL) begin failures++; $display("FAIL mode in idle"); end
      if (br_rsp_valid && idle_q) begin failures++; $display("FAIL branch response in idle"); end
    end else if (bank_pwr != 4'b1111 || mode != MODE_BRANCH) begin
      failures++; $display("FAIL nominal gates");
    end
  end

  // ---- epoch boundary checks -------------------------------------------------
  always @(posedge clk) if (rst_n && epoch_done) begin
    bit was_idle, exp_wake;
    int c;
    c = $countones(cur_neurons);
    chk("outcome_vec", int'(outcome_vec == cur_neurons), 1);
    chk("actual_sync", int'(actual_sync), int'(c >= SYNC_NEURONS));
    was_idle = !cpu_clk_en;
    exp_wake = actual_sync || pred_sync;
    if (was_idle && pred_sync && !actual_sync) n_wake_pred++;
    n_epochs++;
    @(negedge clk);
    if (was_idle) chk("idle decision", int'(cpu_clk_en), int'(exp_wake));
    new_epoch_activity();
  end

  // ---- processor model -----------------------------------------------------------
  // The CPU's branches fall in banks B1..B3 (pc[7:6] != 0), so what B0
  // learned about the neurons survives a wake-up and learning can be seen.
  function automatic logic [31:0] cpu_pc();
    return {24'h0, 2'($urandom_range(1, 3)), 5'($urandom), 1'b0};
  endfunction

  int busy = 0;
  bit prev_en = 0;
  always @(negedge clk) if (rst_n) begin
    br_req_valid = 0; br_upd_valid = 0; cpu_sleep_req = 0;
    if (prev_en && !cpu_clk_en) n_back_idle++;
    prev_en = cpu_clk_en;
    if (cpu_clk_en && busy == 0 && (dut.u_pm.pm_state == 2'd0 || dut.u_pm.pm_state == 2'd3)) begin
      cpu_sleep_req = 1;
      if (dut.u_pm.pm_state == 2'd3 && dut.u_pm.win != 3'(CAP)) n_held++;
    end
    if (cpu_clk_en) begin
      busy = (busy + 1) % 150;
      if (dut.u_pm.pm_state == 2'd0 && cfg_mask == '0) busy = 1;
      br_req_valid = 1; br_req_pc = cpu_pc();
      br_upd_valid = 1; br_upd_pc = cpu_pc();
      br_upd_taken = $urandom_range(0, 1); br_upd_hist = br_rsp_hist;
    end else busy = 0;
  end

  initial begin
    repeat (EC * 2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    leadup_next = 0;
    the_mask = make_mask();
    new_epoch_activity();
    repeat (3) @(negedge clk);
    rst_n = 1;
    // boot: calibration store, then sleep
    @(negedge clk);
    cfg_we = 1; cfg_mask = the_mask;
    @(negedge clk);
    cfg_we = 0;
    wait (n_epochs == 300);
    ok_half = n_ev[EV_SYNC_OK]; miss_half = n_ev[EV_SYNC_MISS];
    wait (n_epochs == 900);
    @(negedge clk);
    $display("second half: sync_ok=%0d sync_miss=%0d", n_ev[EV_SYNC_OK] - ok_half,
             n_ev[EV_SYNC_MISS] - miss_half);
    $display("epochs=%0d nosync_ok=%0d sync_ok=%0d sync_miss=%0d sync_false=%0d trains=%0d",
             n_epochs, n_ev[EV_NOSYNC_OK], n_ev[EV_SYNC_OK], n_ev[EV_SYNC_MISS],
             n_ev[EV_SYNC_FALSE], n_train);
    $display("early_wakes=%0d back_to_idle=%0d held_sleep=%0d gated_cycles=%0d branch_rsps=%0d",
             n_wake_pred, n_back_idle, n_held, n_gated, n_brsp);
    chk("correct non-sync seen", int'(n_ev[EV_NOSYNC_OK] > 0), 1);
    chk("correct sync seen", int'(n_ev[EV_SYNC_OK] > 0), 1);
    chk("missed sync seen", int'(n_ev[EV_SYNC_MISS] > 0), 1);
    chk("false sync seen", int'(n_ev[EV_SYNC_FALSE] > 0), 1);
    chk("training seen", int'(n_train > 0), 1);
    chk("early wake seen", int'(n_wake_pred > 0), 1);
    chk("return to idle seen", int'(n_back_idle > 0), 1);
    chk("held sleep request seen", int'(n_held > 0), 1);
    chk("bank power-down seen", int'(n_gated > 0), 1);
    chk("branch predictions seen", int'(n_brsp > 0), 1);
    // the learned lead-up pattern must give more correct than missed syncs
    chk("perceptron learns the lead-up",
        int'(n_ev[EV_SYNC_OK] - ok_half > n_ev[EV_SYNC_MISS] - miss_half), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
