// neuronal_fsm: the small controller that co-opts the branch predictor for
// neuronal prediction while the processor is idle.
//
// Calibration: one store (cfg_we with cfg_mask) writes the needle mask, one
// bit per Utah-array needle, set for needles that probe a Purkinje neuron.
// Neuron n is the n-th set bit of the mask, counting from needle 0; at most
// NUM_NEURONS neurons are tracked (further set bits are ignored).
//
// Every epoch (epoch_tick) the FSM
//   1. reads the DRAM activity buffer: NUM_NEEDLES bits, one per needle
//      (1 = fired during the epoch that just ended), packed LSB-first into
//      32-bit words at ACT_BUF_BASE, ACT_BUF_BASE+4, ...;
//   2. maps needle bits to the neuron outcome vector through the mask;
//   3. in neuronal mode: trains each neuron's perceptron in bank B0 with
//      its outcome, against the history that holds the outcomes of the
//      epoch before (on entering neuronal mode the FSM reloads the history
//      with the last epoch it has read, since branch prediction has
//      overwritten it; only the very first epoch after reset, with no
//      earlier epoch read, skips training);
//   4. loads the outcome vector into the history register;
//   5. looks up each neuron's perceptron and collects the per-neuron
//      predictions for the next epoch;
//   6. pulses epoch_done with pred_sync (at least SYNC_NEURONS neurons
//      predicted to fire next epoch) and actual_sync (at least SYNC_NEURONS
//      neurons fired in the epoch that just ended).
// In branch mode (processor nominal) the predictor belongs to the CPU, so
// only steps 1, 2 and 6 run, pred_sync is 0 and actual_sync still reports
// whether the epoch was synchronized; the power-mode controller uses it to
// drop back to idle after a false synchronization prediction.
//
// Timing: about NWORDS*(memory latency+1) + 2*neurons + 4 cycles per
// epoch, far below the 3,000,000-cycle epoch. Memory port: mem_req is held
// with a stable mem_addr until mem_ack, which returns mem_rdata in the
// same cycle. Reads are whole 32-bit words, so mem_addr[1:0] is always 0.
//
// The epoch order (update at epoch start, predict at epoch end, here done
// back to back at the epoch boundary), the needle-to-neuron mapping, the
// activity-buffer layout and the memory handshake are this design's
// choices; the two per-epoch operations and the single-store calibration
// follow the paper.
module neuronal_fsm #(
  parameter int unsigned NUM_NEEDLES  = bp_pkg::NUM_NEEDLES,
  parameter int unsigned NUM_NEURONS  = bp_pkg::NUM_NEURONS,
  parameter int unsigned ENTRIES      = bp_pkg::BANK_ENTRIES,
  parameter int unsigned HIST_LEN     = bp_pkg::HIST_LEN,
  parameter int unsigned SYNC_NEURONS = bp_pkg::SYNC_NEURONS,
  parameter logic [31:0] ACT_BUF_BASE = bp_pkg::ACT_BUF_BASE,
  localparam int unsigned IDX_W       = $clog2(ENTRIES),
  localparam int unsigned NWORDS      = (NUM_NEEDLES + 31) / 32,
  localparam int unsigned CNT_W       = $clog2(NUM_NEURONS + 1),
  localparam int unsigned NI_W        = (NUM_NEURONS > 1) ? $clog2(NUM_NEURONS) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  bp_pkg::bp_mode_e       mode,
  input  logic                   epoch_tick,
  // calibration store
  input  logic                   cfg_we,
  input  logic [NUM_NEEDLES-1:0] cfg_mask,
  // activity buffer read port
  output logic                   mem_req,
  output logic [31:0]            mem_addr,
  input  logic                   mem_ack,
  input  logic [31:0]            mem_rdata,
  // predictor access (bank B0)
  output logic                   nr_valid,
  output logic [IDX_W-1:0]       nr_entry,
  output logic                   nr_train,
  output logic                   nr_outcome,
  input  logic                   nr_pred,
  output logic                   nr_hist_load,
  output logic [HIST_LEN-1:0]    nr_hist_val,
  // epoch results
  output logic                   epoch_done,
  output logic                   pred_sync,
  output logic                   actual_sync,
  output logic [NUM_NEURONS-1:0] pred_vec,
  output logic [NUM_NEURONS-1:0] outcome_vec,
  output logic [CNT_W-1:0]       neuron_count,
  output logic [NUM_NEEDLES-1:0] mask
);

  import bp_pkg::*;

  typedef enum logic [2:0] {
    S_WAIT, S_READ, S_MAP, S_UPDATE, S_LOAD, S_PREDICT, S_DONE
  } state_e;

  state_e                  state;
  logic [$clog2(NWORDS+1)-1:0] word;
  logic [CNT_W-1:0]        n;
  logic [NWORDS*32-1:0]    act;
  logic                    hist_valid;
  logic                    prev_ok;     // outcome_vec holds a read epoch
  logic                    entry_load;  // reload history on entering neuronal mode
  logic [NUM_NEURONS-1:0]  neuron_valid;

  // Needle activity -> neuron outcomes, through the calibration mask.
  function automatic logic [NUM_NEURONS-1:0] compact(logic [NUM_NEEDLES-1:0] a,
                                                     logic [NUM_NEEDLES-1:0] m);
    logic [NUM_NEURONS-1:0] v;
    int unsigned            j;
    v = '0;
    j = 0;
    for (int unsigned i = 0; i < NUM_NEEDLES; i++) begin
      if (m[i] && j < NUM_NEURONS) begin
        v[j] = a[i];
        j++;
      end
    end
    return v;
  endfunction

  always_comb begin
    int unsigned c;
    c = 0;
    for (int unsigned i = 0; i < NUM_NEEDLES; i++) c += int'(mask[i]);
    neuron_count = (c > NUM_NEURONS) ? CNT_W'(NUM_NEURONS) : CNT_W'(c);
    for (int unsigned i = 0; i < NUM_NEURONS; i++)
      neuron_valid[i] = (i < neuron_count);
  end

  // ---- control -------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_WAIT;
      word        <= '0;
      n           <= '0;
      act         <= '0;
      hist_valid  <= 1'b0;
      prev_ok     <= 1'b0;
      mask        <= '0;
      pred_vec    <= '0;
      outcome_vec <= '0;
    end else begin
      if (cfg_we) mask <= cfg_mask;
      unique case (state)
        S_WAIT: begin
          if (mode != MODE_NEURONAL) begin
            hist_valid <= 1'b0;
            pred_vec   <= '0;
          end else if (entry_load) begin
            hist_valid <= 1'b1;
          end
          if (epoch_tick) begin
            word  <= '0;
            state <= S_READ;
          end
        end
        S_READ: begin
          if (mem_ack) begin
            act[word*32 +: 32] <= mem_rdata;
            word <= word + 1'b1;
            if (int'(word) == NWORDS - 1) state <= S_MAP;
          end
        end
        S_MAP: begin
          outcome_vec <= compact(act[NUM_NEEDLES-1:0], mask);
          n           <= '0;
          if (mode != MODE_NEURONAL)             state <= S_DONE;
          else if (hist_valid && neuron_count != 0) state <= S_UPDATE;
          else                                   state <= S_LOAD;
        end
        S_UPDATE: begin
          n <= n + 1'b1;
          if (n == neuron_count - 1'b1) state <= S_LOAD;
        end
        S_LOAD: begin
          n        <= '0;
          pred_vec <= '0;
          state    <= (neuron_count != 0) ? S_PREDICT : S_DONE;
        end
        S_PREDICT: begin
          pred_vec[n[NI_W-1:0]] <= nr_pred;
          n <= n + 1'b1;
          if (n == neuron_count - 1'b1) state <= S_DONE;
        end
        S_DONE: begin
          hist_valid <= (mode == MODE_NEURONAL);
          prev_ok    <= 1'b1;
          state      <= S_WAIT;
        end
        default: state <= S_WAIT;
      endcase
    end
  end

  // ---- outputs ---------------------------------------------------------------
  always_comb begin
    mem_req      = (state == S_READ);
    mem_addr     = ACT_BUF_BASE + 32'({word, 2'b00});
    nr_valid     = (state == S_UPDATE) || (state == S_PREDICT);
    nr_entry     = IDX_W'(n);
    nr_train     = (state == S_UPDATE);
    nr_outcome   = outcome_vec[n[NI_W-1:0]];
    entry_load   = (state == S_WAIT) && (mode == MODE_NEURONAL) && !hist_valid && prev_ok;
    nr_hist_load = (state == S_LOAD) || entry_load;
    nr_hist_val  = HIST_LEN'(outcome_vec);
    epoch_done   = (state == S_DONE);
  end

  logic [CNT_W-1:0] pred_cnt, act_cnt;
  logic             pred_sync_raw;

  sync_detector #(.N(NUM_NEURONS)) u_pred_sync (
    .fire     (pred_vec),
    .valid    (neuron_valid),
    .threshold(CNT_W'(SYNC_NEURONS)),
    .count    (pred_cnt),
    .sync     (pred_sync_raw)
  );

  sync_detector #(.N(NUM_NEURONS)) u_act_sync (
    .fire     (outcome_vec),
    .valid    (neuron_valid),
    .threshold(CNT_W'(SYNC_NEURONS)),
    .count    (act_cnt),
    .sync     (actual_sync)
  );

  assign pred_sync = pred_sync_raw && (mode == MODE_NEURONAL);

  // ---- handshake / sizing rules --------------------------------------------------
  initial begin
    assert (NUM_NEURONS <= ENTRIES && NUM_NEURONS <= HIST_LEN)
      else $error("neuronal_fsm: every neuron needs a B0 entry and a history bit");
  end

  a_tick_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                epoch_tick |-> state == S_WAIT)
    else $error("neuronal_fsm: epoch shorter than one FSM sweep");
  a_req_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               mem_req && !mem_ack |=> mem_req && $stable(mem_addr))
    else $error("neuronal_fsm: memory request dropped before ack");

endmodule
