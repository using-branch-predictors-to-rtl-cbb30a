// epoch_timer: divides the always-on clock into prediction epochs.
//
// Emits a one-cycle `tick` every EPOCH_CYCLES clock cycles: 10ms epochs at
// the 300MHz core clock give 3,000,000 cycles. The first tick comes
// EPOCH_CYCLES cycles after reset is released or after `restart`.
// The timer runs in the always-on domain (the clock of the predictor bank
// that stays powered), which is this design's assumption: the source of
// the epoch clock is not specified.
module epoch_timer #(
  parameter int unsigned EPOCH_CYCLES = bp_pkg::EPOCH_CYCLES,
  localparam int unsigned CW = $clog2(EPOCH_CYCLES + 1)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic restart,
  output logic tick
);

  logic [CW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= '0;
      tick <= 1'b0;
    end else if (restart) begin
      cnt  <= '0;
      tick <= 1'b0;
    end else if (cnt == CW'(EPOCH_CYCLES - 1)) begin
      cnt  <= '0;
      tick <= 1'b1;
    end else begin
      cnt  <= cnt + 1'b1;
      tick <= 1'b0;
    end
  end

endmodule
