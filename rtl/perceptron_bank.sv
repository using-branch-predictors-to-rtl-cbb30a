// perceptron_bank: one bank (B0..B3) of the perceptron pattern-history
// table.
//
// The bank stores ENTRIES perceptrons. Each entry is HIST_LEN+1 weights of
// WEIGHT_BITS bits in one's complement; weight 0 is the bias weight w0 and
// weight i (1..HIST_LEN) pairs with history bit i-1. With the defaults an
// entry is 32 history weights plus the bias, so the weights of a bank are
// 32 x 32 bytes = 1KB, the bank budget of the evaluated design, plus 32
// bias bytes (whether the bias is counted inside the 1KB is not stated;
// here it is kept in addition).
//
// Interface and timing: two read ports with combinational (same-cycle)
// read data, one synchronous write port. A read of the entry being written
// in the same cycle returns the old contents.
//
// Power gating: the bank sits in its own power domain. While pwr_on is low
// the bank is off and loses its contents; this model clears every entry to
// zero while power is off (and at reset), so a re-powered bank starts from
// all-zero weights. Writes are ignored while off, and reads return zero.
// The clear-to-zero stands in for the undefined contents of a real
// power-gated array; it is this design's choice.
module perceptron_bank #(
  parameter int unsigned ENTRIES     = bp_pkg::BANK_ENTRIES,
  parameter int unsigned HIST_LEN    = bp_pkg::HIST_LEN,
  parameter int unsigned WEIGHT_BITS = bp_pkg::WEIGHT_BITS,
  localparam int unsigned IDX_W      = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   pwr_on,
  input  logic [IDX_W-1:0]                       rd0_idx,
  output logic [HIST_LEN:0][WEIGHT_BITS-1:0]     rd0_data,
  input  logic [IDX_W-1:0]                       rd1_idx,
  output logic [HIST_LEN:0][WEIGHT_BITS-1:0]     rd1_data,
  input  logic                                   we,
  input  logic [IDX_W-1:0]                       wr_idx,
  input  logic [HIST_LEN:0][WEIGHT_BITS-1:0]     wr_data
);

  typedef logic [HIST_LEN:0][WEIGHT_BITS-1:0] entry_t;

  entry_t mem [ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) mem[i] <= '0;
    end else if (!pwr_on) begin
      for (int i = 0; i < ENTRIES; i++) mem[i] <= '0;
    end else if (we) begin
      mem[wr_idx] <= wr_data;
    end
  end

  always_comb begin
    rd0_data = pwr_on ? mem[rd0_idx] : '0;
    rd1_data = pwr_on ? mem[rd1_idx] : '0;
  end

  a_wr_idx: assert property (@(posedge clk) disable iff (!rst_n)
                             we && pwr_on |-> int'(wr_idx) < ENTRIES)
    else $error("perceptron_bank: write index out of range");

endmodule
