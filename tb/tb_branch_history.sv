// tb_branch_history: self-checking test of the global history register.
// A reference register in the testbench follows random shift and load
// commands (a load wins over a shift); the DUT must match every cycle.
module tb_branch_history;
  localparam int H = 32;
  logic clk = 0, rst_n = 0, shift_en = 0, shift_bit = 0, load_en = 0;
  logic [H-1:0] load_val = '0, hist, ref_h;
  int checks = 0, failures = 0, loads = 0, shifts = 0;

  branch_history #(.HIST_LEN(H)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_h = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      checks++;
      if (hist !== ref_h) begin
        failures++;
        $display("FAIL cycle %0d: got %h expected %h", t, hist, ref_h);
      end
      shift_en  = ($urandom_range(0, 3) != 0);
      shift_bit = $urandom_range(0, 1);
      load_en   = ($urandom_range(0, 7) == 0);
      load_val  = $urandom;
      if (load_en) begin ref_h = load_val; loads++; end
      else if (shift_en) begin ref_h = {ref_h[H-2:0], shift_bit}; shifts++; end
    end
    checks++;
    if (loads == 0 || shifts == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
