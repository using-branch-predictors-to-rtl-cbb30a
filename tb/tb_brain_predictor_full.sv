// tb_brain_predictor_full: one complete operation of the branch/brain
// predictor with every parameter at its default: 10ms epochs of 3,000,000
// cycles at 300MHz, a 500ms (50-epoch) capture window, 4 banks of 32
// perceptrons with 32 8-bit weights, 100 needles, 32 neurons and
// synchronization at 4 firing neurons.
//
// Sequence: reset; the processor stores the needle mask (needles 0, 3, 6,
// ... are neurons) and asks to sleep; Idle epochs with a little random
// activity and lead-up / synchronized epoch pairs; the predictor wakes the
// processor (early on a predicted synchronization, at once on a missed
// one); the processor runs branch predictions and asks to sleep well before
// the 500ms window is over; the controller holds Nominal until the window
// ends and then returns to Idle, where prediction resumes.
// Checks at every epoch boundary: outcome vector and actual_sync against
// the activity the testbench wrote, and the Idle decision rule (wake iff a
// synchronization happened or is predicted). Checks at the end: the whole
// operation took place (at least one capture of CAPTURE_EPOCHS epochs that
// ended back in Idle, with only bank B0 powered while idle), and training
// happened.
module tb_brain_predictor_full;
  import bp_pkg::*;
  localparam int NN = NUM_NEEDLES, NR = NUM_NEURONS, SW = 15;

  logic clk = 0, rst_n = 0;
  logic br_req_valid = 0, br_rsp_valid, br_rsp_taken, br_upd_valid = 0, br_upd_taken = 0;
  logic [31:0] br_req_pc = 0, br_upd_pc = 0;
  logic signed [SW-1:0] br_rsp_y;
  logic [HIST_LEN-1:0] br_rsp_hist, br_upd_hist = '0;
  logic cfg_we = 0, cpu_sleep_req = 0;
  logic [NN-1:0] cfg_mask = '0;
  logic mem_req, mem_ack = 0;
  logic [31:0] mem_addr, mem_rdata = '0;
  logic cpu_clk_en;
  logic [NUM_BANKS-1:0] bank_pwr;
  bp_mode_e mode;
  logic epoch_done, pred_sync, actual_sync, ev_valid, nr_trained;
  logic [NR-1:0] pred_vec, outcome_vec;
  sync_event_e ev_kind;

  brain_predictor_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  // ---- activity buffer ----------------------------------------------------------
  logic [127:0]  buffer;
  logic [NR-1:0] cur_neurons;
  int            epoch_no = 0;

  // Epoch schedule: lead-up (neurons 0,1) at epochs 2, 8, 14, ... and a
  // synchronized epoch (neurons 0..5) right after each; otherwise at most
  // one random neuron fires.
  task automatic new_epoch_activity();
    logic [NR-1:0] v;
    v = '0;
    if (epoch_no % 6 == 2) v[1:0] = 2'b11;
    else if (epoch_no % 6 == 3) v[5:0] = 6'h3F;
    else if ($urandom_range(0, 1) == 0) v[$urandom_range(6, NR - 1)] = 1'b1;
    cur_neurons = v;
    buffer = {$urandom, $urandom, $urandom, $urandom};
    for (int i = 0; i < NR; i++) buffer[3 * i] = v[i];
  endtask

  // DRAM: wakes only while the FSM reads (the testbench processes sleep
  // for the rest of the 3,000,000-cycle epoch, which keeps the run short).
  initial forever begin
    @(posedge mem_req);
    while (mem_req) begin
      @(negedge clk);
      mem_ack   = 1;
      mem_rdata = buffer[(mem_addr - ACT_BUF_BASE) * 8 +: 32];
      @(negedge clk);
      mem_ack   = 0;
    end
  end

  // ---- epoch boundary checks ------------------------------------------------------
  int n_ev [4] = '{0, 0, 0, 0};
  int n_train = 0, n_epochs = 0, n_captures_done = 0;
  bit in_capture = 0;
  int capture_len = 0;

  initial forever begin
    @(posedge ev_valid);
    @(negedge clk);
    n_ev[ev_kind]++;
  end
  initial forever begin
    @(posedge nr_trained);
    @(negedge clk);
    while (nr_trained) begin n_train++; @(negedge clk); end
  end

  initial forever begin
    bit was_idle, exp_wake;
    @(posedge epoch_done);
    @(negedge clk);
    chk("outcome_vec", int'(outcome_vec == cur_neurons), 1);
    chk("actual_sync", int'(actual_sync), int'($countones(cur_neurons) >= SYNC_NEURONS));
    was_idle = !cpu_clk_en;
    exp_wake = actual_sync || pred_sync;
    n_epochs++;
    if (in_capture) capture_len++;
    @(negedge clk);
    if (was_idle) begin
      chk("idle decision", int'(cpu_clk_en), int'(exp_wake));
      if (!cpu_clk_en) chk("only B0 powered in idle", int'(bank_pwr), 1);
    end
    $display("epoch %0d: fired=%0d pred_sync=%0d cpu_clk_en=%0d", n_epochs,
             $countones(cur_neurons), pred_sync, cpu_clk_en);
    epoch_no++;
    new_epoch_activity();
  end

  // ---- processor --------------------------------------------------------------------
  initial begin
    new_epoch_activity();
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    cfg_we = 1; cfg_mask = '0;
    for (int i = 0; i < NR; i++) cfg_mask[3 * i] = 1'b1;
    @(negedge clk);
    cfg_we = 0; cpu_sleep_req = 1;
    @(negedge clk);
    cpu_sleep_req = 0;
    chk("idle after boot", int'(cpu_clk_en), 0);
    forever begin
      wait (cpu_clk_en);
      // some branch work
      repeat (200) begin
        @(negedge clk);
        br_req_valid = 1; br_req_pc = {24'h0, 2'($urandom_range(1, 3)), 5'($urandom), 1'b0};
        br_upd_valid = 1; br_upd_pc = br_req_pc; br_upd_taken = $urandom_range(0, 1);
        br_upd_hist = br_rsp_hist;
      end
      @(negedge clk);
      br_req_valid = 0; br_upd_valid = 0;
      if (dut.u_pm.pm_state == 2'd3) begin
        // processing finished early: ask to sleep and wait for the window
        in_capture = 1; capture_len = 0;
        cpu_sleep_req = 1; @(negedge clk); cpu_sleep_req = 0;
        chk("sleep held during window", int'(cpu_clk_en), 1);
        wait (!cpu_clk_en);
        in_capture = 0;
        chk("capture lasted the window", int'(capture_len >= CAPTURE_EPOCHS - 1), 1);
        n_captures_done++;
      end else begin
        wait (!cpu_clk_en || dut.u_pm.pm_state == 2'd3);
      end
    end
  end

  initial begin
    int e;
    wait (n_captures_done == 1);
    // a few more idle epochs with prediction running again
    e = n_epochs;
    wait (n_epochs == e + 3);
    @(negedge clk);
    $display("epochs=%0d nosync_ok=%0d sync_ok=%0d sync_miss=%0d sync_false=%0d trains=%0d",
             n_epochs, n_ev[EV_NOSYNC_OK], n_ev[EV_SYNC_OK], n_ev[EV_SYNC_MISS],
             n_ev[EV_SYNC_FALSE], n_train);
    chk("capture completed", int'(n_captures_done >= 1), 1);
    chk("training happened", int'(n_train > 0), 1);
    chk("synchronization detected", int'(n_ev[EV_SYNC_OK] + n_ev[EV_SYNC_MISS] > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(longint'(100) * EPOCH_CYCLES * 10);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
