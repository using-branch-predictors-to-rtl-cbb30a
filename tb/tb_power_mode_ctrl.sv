// tb_power_mode_ctrl: self-checking test of the Idle/Nominal controller,
// with a 3-epoch capture window. It walks through boot, a correctly
// predicted non-synchronization, a correctly predicted synchronization, a
// false prediction (back to Idle after one epoch), a missed
// synchronization (immediate wake), a sleep request before the capture
// window has passed (held until the window ends) and one after it.
// After every step the expected state, gate enables, mode and event are
// compared with the values the testbench expects.
module tb_power_mode_ctrl;
  import bp_pkg::*;
  localparam int CAP = 3;
  logic clk = 0, rst_n = 0, epoch_done = 0, pred_sync = 0, actual_sync = 0;
  logic cpu_sleep_req = 0, cpu_clk_en, ev_valid;
  logic [3:0] bank_pwr;
  bp_mode_e mode;
  sync_event_e ev_kind;
  logic [1:0] pm_state;
  int checks = 0, failures = 0;
  int n_ev [4] = '{0, 0, 0, 0};

  power_mode_ctrl #(.NUM_BANKS(4), .CAPTURE_EPOCHS(CAP)) dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) if (ev_valid) n_ev[ev_kind]++;

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  // expect Idle (1) or one of the nominal states
  task automatic expect_state(string what, int st);
    chk({what, " state"}, int'(pm_state), st);
    chk({what, " cpu_clk_en"}, int'(cpu_clk_en), st != 1);
    chk({what, " bank_pwr"}, int'(bank_pwr), st == 1 ? 1 : 15);
    chk({what, " mode"}, int'(mode), st == 1 ? int'(MODE_NEURONAL) : int'(MODE_BRANCH));
  endtask

  task automatic epoch(bit p, bit a, int exp_ev);
    @(negedge clk);
    epoch_done = 1; pred_sync = p; actual_sync = a;
    @(negedge clk);
    epoch_done = 0; pred_sync = 0; actual_sync = 0;
    if (exp_ev >= 0) begin
      chk("ev_valid", int'(ev_valid), 1);
      chk("ev_kind", int'(ev_kind), exp_ev);
    end else chk("no event", int'(ev_valid), 0);
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    expect_state("boot", 0);
    epoch(0, 0, -1);                 // epochs are ignored while booting
    expect_state("boot stays", 0);
    cpu_sleep_req = 1; @(negedge clk); cpu_sleep_req = 0;
    expect_state("idle", 1);
    epoch(0, 0, int'(EV_NOSYNC_OK));
    expect_state("idle after quiet epoch", 1);
    epoch(1, 0, int'(EV_NOSYNC_OK)); // next epoch predicted synchronized
    expect_state("woken early", 2);
    epoch(0, 1, int'(EV_SYNC_OK));   // it was
    expect_state("capture", 3);
    cpu_sleep_req = 1; @(negedge clk); cpu_sleep_req = 0;   // early request
    expect_state("early sleep held", 3);
    epoch(0, 0, -1); epoch(0, 0, -1);
    expect_state("window not over", 3);
    epoch(0, 0, -1);
    @(negedge clk);
    expect_state("idle after window + request", 1);
    epoch(1, 0, int'(EV_NOSYNC_OK));
    expect_state("woken on prediction", 2);
    epoch(0, 0, int'(EV_SYNC_FALSE));  // false alarm
    expect_state("back to idle", 1);
    epoch(0, 1, int'(EV_SYNC_MISS));   // missed synchronization
    expect_state("woken on miss", 3);
    repeat (CAP) epoch(0, 0, -1);
    repeat (5) @(negedge clk);
    expect_state("processing longer than window", 3);
    cpu_sleep_req = 1; @(negedge clk); cpu_sleep_req = 0;
    expect_state("idle after late request", 1);
    chk("nosync_ok events", n_ev[EV_NOSYNC_OK], 3);
    chk("sync_ok events", n_ev[EV_SYNC_OK], 1);
    chk("sync_miss events", n_ev[EV_SYNC_MISS], 1);
    chk("sync_false events", n_ev[EV_SYNC_FALSE], 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
