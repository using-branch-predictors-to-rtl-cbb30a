// tb_epoch_timer: self-checking test of the epoch timer with a 37-cycle
// epoch: the first tick comes 37 cycles after reset, ticks are one cycle
// wide and exactly 37 cycles apart, and restart starts a fresh epoch.
module tb_epoch_timer;
  localparam int EC = 37;
  logic clk = 0, rst_n = 0, restart = 0, tick;
  int checks = 0, failures = 0, cyc = 0, last = -1, nticks = 0;

  epoch_timer #(.EPOCH_CYCLES(EC)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: %0d vs %0d", what, got, exp); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (tick) begin
      if (last < 0) chk("first tick", cyc, EC);
      else          chk("tick period", cyc - last, EC);
      last   <= cyc;
      nticks <= nticks + 1;
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    wait (nticks == 6);
    // restart in the middle of an epoch
    repeat (10) @(negedge clk);
    restart = 1;
    @(negedge clk);
    restart = 0;
    last = -1; cyc = 0;
    wait (nticks == 8);
    @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
