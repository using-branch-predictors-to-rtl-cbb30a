// tb_neuronal_fsm: self-checking test of the neuronal FSM with 40 needles
// (two activity-buffer words), 8 neurons and a synchronization threshold of
// 3. The testbench stands in for the DRAM (random response latency) and for
// the predictor bank (a per-epoch random table of per-neuron predictions).
// For every epoch it checks the activity-buffer addresses, the needle to
// neuron mapping, the order and outcomes of the training accesses (none in
// the first epoch after reset; on re-entering neuronal mode the history is
// reloaded at once), the history load, the prediction accesses,
// pred_vec, pred_sync and actual_sync, all against values the testbench
// computes itself. Branch-mode epochs must not touch the predictor.
module tb_neuronal_fsm;
  import bp_pkg::*;
  localparam int NN = 40, NR = 8, E = 8, H = 8, SN = 3;
  localparam logic [31:0] BASE = 32'h2000_0000;

  logic clk = 0, rst_n = 0, epoch_tick = 0, cfg_we = 0;
  bp_mode_e mode = MODE_NEURONAL;
  logic [NN-1:0] cfg_mask = '0, mask;
  logic mem_req, mem_ack = 0;
  logic [31:0] mem_addr, mem_rdata = '0;
  logic nr_valid, nr_train, nr_outcome, nr_pred, nr_hist_load;
  logic [2:0] nr_entry;
  logic [H-1:0] nr_hist_val;
  logic epoch_done, pred_sync, actual_sync;
  logic [NR-1:0] pred_vec, outcome_vec;
  logic [3:0] neuron_count;

  neuronal_fsm #(.NUM_NEEDLES(NN), .NUM_NEURONS(NR), .ENTRIES(E), .HIST_LEN(H),
                 .SYNC_NEURONS(SN), .ACT_BUF_BASE(BASE)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [63:0]   activity;        // DRAM contents (words 0 and 1)
  logic [NR-1:0] ptab;            // predictor model: prediction per neuron
  int upd_log[$], upd_out[$], prd_log[$], addr_log[$];
  int hist_loads; logic [H-1:0] hist_seen;

  assign nr_pred = ptab[nr_entry];

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  // DRAM model with 0..3 wait cycles
  always @(posedge clk) begin
    if (mem_req && !mem_ack) begin
      if ($urandom_range(0, 2) == 0) begin
        mem_ack   <= 1;
        mem_rdata <= (mem_addr == BASE) ? activity[31:0] : activity[63:32];
        addr_log.push_back(int'(mem_addr - BASE));
      end
    end else mem_ack <= 0;
  end

  always @(posedge clk) if (rst_n) begin
    if (nr_valid && nr_train) begin upd_log.push_back(int'(nr_entry)); upd_out.push_back(int'(nr_outcome)); end
    if (nr_valid && !nr_train) prd_log.push_back(int'(nr_entry));
    if (nr_hist_load) begin hist_loads++; hist_seen = nr_hist_val; end
  end

  function automatic logic [NR-1:0] ref_map(logic [NN-1:0] a, logic [NN-1:0] m);
    logic [NR-1:0] v = '0; int j = 0;
    for (int i = 0; i < NN; i++) if (m[i]) begin
      if (j < NR) v[j] = a[i];
      j++;
    end
    return v;
  endfunction

  task automatic run_epoch(bit first, string tag);
    logic [NR-1:0] exp_out, exp_pred;
    int cnt, pc;
    cnt = $countones(cfg_mask) > NR ? NR : $countones(cfg_mask);
    activity = {$urandom, $urandom};
    ptab = $urandom;
    upd_log.delete(); upd_out.delete(); prd_log.delete(); addr_log.delete(); hist_loads = 0;
    @(negedge clk); epoch_tick = 1; @(negedge clk); epoch_tick = 0;
    wait (epoch_done); @(negedge clk); @(negedge clk);
    exp_out = ref_map(activity[NN-1:0], cfg_mask);
    chk({tag, " reads"}, addr_log.size(), 2);
    if (addr_log.size() == 2) begin chk({tag, " addr0"}, addr_log[0], 0); chk({tag, " addr1"}, addr_log[1], 4); end
    chk({tag, " outcome_vec"}, int'(outcome_vec), int'(exp_out));
    if (mode == MODE_NEURONAL) begin
      chk({tag, " updates"}, upd_log.size(), first ? 0 : cnt);
      foreach (upd_log[k]) begin
        chk({tag, " upd entry"}, upd_log[k], k);
        chk({tag, " upd outcome"}, upd_out[k], int'(exp_out[k]));
      end
      chk({tag, " hist loads"}, hist_loads, 1);
      chk({tag, " hist value"}, int'(hist_seen), int'(exp_out));
      chk({tag, " predictions"}, prd_log.size(), cnt);
      foreach (prd_log[k]) chk({tag, " prd entry"}, prd_log[k], k);
      exp_pred = ptab & NR'((1 << cnt) - 1);
      chk({tag, " pred_vec"}, int'(pred_vec & NR'((1 << cnt) - 1)), int'(exp_pred));
    end else begin
      chk({tag, " no predictor use"}, upd_log.size() + prd_log.size() + hist_loads, 0);
    end
  endtask

  // check the sync flags while epoch_done is high
  int sync_checks = 0;
  always @(posedge clk) if (rst_n && epoch_done) begin
    int c, pc;
    c  = $countones(outcome_vec & NR'((1 << neuron_count) - 1));
    pc = $countones(pred_vec & NR'((1 << neuron_count) - 1));
    chk("actual_sync at done", int'(actual_sync), c >= SN);
    chk("pred_sync at done", int'(pred_sync), (mode == MODE_NEURONAL) && pc >= SN);
    chk("count vs mask", int'(neuron_count), $countones(mask) > NR ? NR : $countones(mask));
    sync_checks++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // calibration store: 6 neurons on scattered needles
    @(negedge clk);
    cfg_we = 1; cfg_mask = 40'h80_0100_1221; @(negedge clk); cfg_we = 0;
    chk("mask stored", int'(mask == cfg_mask), 1);
    run_epoch(1, "e0");
    for (int e = 1; e < 12; e++) run_epoch(0, "en");
    // processor wakes: branch mode epochs only report activity
    mode = MODE_BRANCH;
    run_epoch(0, "br0"); run_epoch(0, "br1");
    // back to idle: the history is reloaded with the last epoch read, so
    // training resumes at once
    mode = MODE_NEURONAL;
    @(negedge clk);
    chk("history reloaded on entry", int'(hist_loads == 1 && hist_seen == outcome_vec), 1);
    @(negedge clk);
    run_epoch(0, "re0");
    run_epoch(0, "re1");
    // more set needles than tracked neurons: extra ones ignored
    @(negedge clk); cfg_we = 1; cfg_mask = 40'hFF_F0F0_0FFF; @(negedge clk); cfg_we = 0;
    for (int e = 0; e < 6; e++) run_epoch(0, "full");
    chk("sync flags checked", int'(sync_checks >= 20), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
