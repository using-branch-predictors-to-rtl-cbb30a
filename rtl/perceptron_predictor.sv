// perceptron_predictor: the banked perceptron branch predictor that is
// also used as a neuronal-activity predictor.
//
// Structure: NUM_BANKS perceptron banks (B0..B3 by default), one global
// history register and the shared lookup/update logic. The banks together
// hold NUM_BANKS*ENTRIES perceptrons.
//
// Branch mode (mode = MODE_BRANCH, processor in nominal operation):
//  * Predict port: br_req_valid with br_req_pc. The perceptron at
//    pc[IDX_W:1] (halfword-aligned Thumb PCs; the top bits of that field
//    select the bank, the rest the entry) is looked up against the current
//    history. The response (br_rsp_valid, taken, y and the history snapshot
//    used) is registered and appears one cycle later.
//  * Update port: br_upd_valid with the branch's pc, its resolved outcome
//    and the history snapshot returned with its prediction. The entry is
//    read, y recomputed, the weights trained when needed and written back
//    in the same cycle, and the outcome is shifted into the history.
//    History is therefore updated at resolve time, not speculatively.
// Neuronal mode (mode = MODE_NEURONAL, processor idle):
//  * Only bank B0 is used; the CPU ports are ignored. The neuronal FSM
//    addresses B0 entry nr_entry (= neuron number) with nr_valid. nr_pred
//    and nr_y are combinational lookups against the history register.
//    With nr_train set the entry is trained with nr_outcome (if needed) at
//    the clock edge. nr_hist_load overwrites the history with the neuron
//    firing vector nr_hist_val.
//
// Power: bank_pwr[b] is the enable of bank b's power switch; an unpowered
// bank loses its weights (see perceptron_bank). Which banks are on is
// decided by the power-mode controller (only B0 in idle mode).
//
// The number of banks, the PC-to-entry mapping, the registered branch
// response and the non-speculative history are this design's choices; the
// paper leaves branch-mode access unchanged from a conventional perceptron
// predictor and does not describe it further.
module perceptron_predictor #(
  parameter int unsigned NUM_BANKS   = bp_pkg::NUM_BANKS,
  parameter int unsigned ENTRIES     = bp_pkg::BANK_ENTRIES,
  parameter int unsigned HIST_LEN    = bp_pkg::HIST_LEN,
  parameter int unsigned WEIGHT_BITS = bp_pkg::WEIGHT_BITS,
  parameter int unsigned THETA       = bp_pkg::THETA,
  parameter bit          BIPOLAR     = 1'b1,
  localparam int unsigned IDX_W      = $clog2(ENTRIES),
  localparam int unsigned BANK_W     = (NUM_BANKS > 1) ? $clog2(NUM_BANKS) : 1,
  localparam int unsigned SUM_W      = bp_pkg::sum_bits(HIST_LEN, WEIGHT_BITS)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  bp_pkg::bp_mode_e         mode,
  input  logic [NUM_BANKS-1:0]     bank_pwr,
  // branch prediction (nominal mode)
  input  logic                     br_req_valid,
  input  logic [31:0]              br_req_pc,
  output logic                     br_rsp_valid,
  output logic                     br_rsp_taken,
  output logic signed [SUM_W-1:0]  br_rsp_y,
  output logic [HIST_LEN-1:0]      br_rsp_hist,
  input  logic                     br_upd_valid,
  input  logic [31:0]              br_upd_pc,
  input  logic                     br_upd_taken,
  input  logic [HIST_LEN-1:0]      br_upd_hist,
  // neuronal prediction (idle mode), bank B0 only
  input  logic                     nr_valid,
  input  logic [IDX_W-1:0]         nr_entry,
  input  logic                     nr_train,
  input  logic                     nr_outcome,
  output logic                     nr_pred,
  output logic signed [SUM_W-1:0]  nr_y,
  output logic                     nr_trained,
  input  logic                     nr_hist_load,
  input  logic [HIST_LEN-1:0]      nr_hist_val,
  // current global history
  output logic [HIST_LEN-1:0]      hist
);

  import bp_pkg::*;

  typedef logic [HIST_LEN:0][WEIGHT_BITS-1:0] entry_t;

  // ---- address split ------------------------------------------------------
  function automatic logic [IDX_W-1:0] pc_entry(logic [31:0] pc);
    return pc[IDX_W:1];
  endfunction
  function automatic logic [BANK_W-1:0] pc_bank(logic [31:0] pc);
    return (NUM_BANKS > 1) ? BANK_W'(pc[IDX_W+BANK_W:IDX_W+1]) : '0;
  endfunction

  logic neuronal;
  assign neuronal = (mode == MODE_NEURONAL);

  logic [IDX_W-1:0]  rd0_idx, rd1_idx, wr_idx;
  logic [BANK_W-1:0] rd0_bank, rd1_bank, wr_bank;
  entry_t            rd0_data [NUM_BANKS];
  entry_t            rd1_data [NUM_BANKS];
  entry_t            w_pred, w_upd, w_new;
  logic              we;

  always_comb begin
    if (neuronal) begin
      rd0_idx = nr_entry;  rd0_bank = '0;
      rd1_idx = nr_entry;  rd1_bank = '0;
    end else begin
      rd0_idx = pc_entry(br_req_pc);  rd0_bank = pc_bank(br_req_pc);
      rd1_idx = pc_entry(br_upd_pc);  rd1_bank = pc_bank(br_upd_pc);
    end
    wr_idx  = rd1_idx;
    wr_bank = rd1_bank;
    w_pred  = rd0_data[rd0_bank];
    w_upd   = rd1_data[rd1_bank];
  end

  // ---- banks ----------------------------------------------------------------
  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    perceptron_bank #(
      .ENTRIES    (ENTRIES),
      .HIST_LEN   (HIST_LEN),
      .WEIGHT_BITS(WEIGHT_BITS)
    ) u_bank (
      .clk     (clk),
      .rst_n   (rst_n),
      .pwr_on  (bank_pwr[b]),
      .rd0_idx (rd0_idx),
      .rd0_data(rd0_data[b]),
      .rd1_idx (rd1_idx),
      .rd1_data(rd1_data[b]),
      .we      (we && (wr_bank == BANK_W'(b))),
      .wr_idx  (wr_idx),
      .wr_data (w_new)
    );
  end

  // ---- lookup (prediction path) -----------------------------------------------
  logic signed [SUM_W-1:0] y_pred, y_upd;
  logic                    p_pred, p_upd, t_pred_unused, t_upd;
  entry_t                  nw_unused;

  bp_lookup_update #(
    .HIST_LEN(HIST_LEN), .WEIGHT_BITS(WEIGHT_BITS), .THETA(THETA), .BIPOLAR(BIPOLAR)
  ) u_lookup (
    .weights    (w_pred),
    .hist       (hist),
    .outcome    (1'b0),
    .y          (y_pred),
    .pred       (p_pred),
    .need_train (t_pred_unused),
    .new_weights(nw_unused)
  );

  // ---- update path --------------------------------------------------------------
  logic [HIST_LEN-1:0] upd_hist;
  logic                upd_outcome;
  assign upd_hist    = neuronal ? hist       : br_upd_hist;
  assign upd_outcome = neuronal ? nr_outcome : br_upd_taken;

  bp_lookup_update #(
    .HIST_LEN(HIST_LEN), .WEIGHT_BITS(WEIGHT_BITS), .THETA(THETA), .BIPOLAR(BIPOLAR)
  ) u_update (
    .weights    (w_upd),
    .hist       (upd_hist),
    .outcome    (upd_outcome),
    .y          (y_upd),
    .pred       (p_upd),
    .need_train (t_upd),
    .new_weights(w_new)
  );

  assign we = neuronal ? (nr_valid && nr_train && t_upd)
                       : (br_upd_valid && t_upd);

  assign nr_pred    = p_pred;
  assign nr_y       = y_pred;
  assign nr_trained = neuronal && nr_valid && nr_train && t_upd;

  // ---- history ------------------------------------------------------------------
  branch_history #(.HIST_LEN(HIST_LEN)) u_hist (
    .clk      (clk),
    .rst_n    (rst_n),
    .shift_en (!neuronal && br_upd_valid),
    .shift_bit(br_upd_taken),
    .load_en  (neuronal && nr_hist_load),
    .load_val (nr_hist_val),
    .hist     (hist)
  );

  // ---- registered branch response -----------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      br_rsp_valid <= 1'b0;
      br_rsp_taken <= 1'b0;
      br_rsp_y     <= '0;
      br_rsp_hist  <= '0;
    end else begin
      br_rsp_valid <= br_req_valid && !neuronal;
      br_rsp_taken <= p_pred;
      br_rsp_y     <= y_pred;
      br_rsp_hist  <= hist;
    end
  end

  a_b0_on_in_neuronal: assert property (@(posedge clk) disable iff (!rst_n)
                                        neuronal |-> bank_pwr[0])
    else $error("perceptron_predictor: bank B0 must stay powered in neuronal mode");

endmodule
