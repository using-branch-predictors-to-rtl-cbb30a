// tb_perceptron_bank: self-checking test of one perceptron bank.
// Uses a small bank (4 entries of 3+1 weights of 8 bits) and a reference
// array kept by the testbench. Checks: written entries read back on both
// ports, a read during a write returns the old entry, power-off clears
// every entry and blocks writes, reads while off return zero.
module tb_perceptron_bank;
  localparam int E = 4, H = 3, W = 8;
  typedef logic [H:0][W-1:0] entry_t;

  logic clk = 0, rst_n = 0, pwr_on = 1, we = 0;
  logic [1:0] rd0_idx = 0, rd1_idx = 0, wr_idx = 0;
  entry_t rd0_data, rd1_data, wr_data = '0;
  entry_t ref_m [E];
  int checks = 0, failures = 0;

  perceptron_bank #(.ENTRIES(E), .HIST_LEN(H), .WEIGHT_BITS(W)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(string what, entry_t got, entry_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (ref_m[i]) ref_m[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int r = 0; r < E; r++) begin
      rd0_idx = 2'(r); #1 check("reset clear", rd0_data, '0);
    end
    // write all entries with random data
    for (int i = 0; i < E; i++) begin
      @(negedge clk);
      we = 1; wr_idx = 2'(i); wr_data = {$urandom, $urandom};
      ref_m[i] = wr_data;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < E; i++) begin
      rd0_idx = 2'(i); rd1_idx = 2'(E - 1 - i); #1;
      check("rd0", rd0_data, ref_m[i]);
      check("rd1", rd1_data, ref_m[E-1-i]);
    end
    // read during write returns the old value, new value next cycle
    @(negedge clk);
    we = 1; wr_idx = 2; wr_data = {$urandom, $urandom}; rd0_idx = 2; #1;
    check("read-old during write", rd0_data, ref_m[2]);
    ref_m[2] = wr_data;
    @(negedge clk); we = 0; #1;
    check("read-new after write", rd0_data, ref_m[2]);
    // power off: contents lost, reads zero, writes ignored
    pwr_on = 0;
    @(negedge clk);
    we = 1; wr_idx = 1; wr_data = '1; #1;
    check("read while off", rd0_data, '0);
    @(negedge clk); we = 0; pwr_on = 1; #1;
    for (int i = 0; i < E; i++) begin
      rd1_idx = 2'(i); #1;
      check("cleared after power-off", rd1_data, '0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
