// tb_sync_detector: self-checking test of the synchronization detector
// with 32 neurons: random firing and valid vectors and thresholds 2, 4, 8
// and 10, compared with a popcount computed in the testbench, plus the
// boundary cases count = threshold - 1 and count = threshold.
module tb_sync_detector;
  localparam int N = 32;
  logic [N-1:0] fire, valid;
  logic [5:0]   threshold, count;
  logic         sync;
  int checks = 0, failures = 0;

  sync_detector #(.N(N)) dut (.*);

  task automatic chk();
    int c;
    c = $countones(fire & valid);
    #1;
    checks += 2;
    if (int'(count) != c) begin failures++; $display("FAIL count %0d vs %0d", count, c); end
    if (sync != (c >= int'(threshold))) begin failures++; $display("FAIL sync"); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int th [4] = '{2, 4, 8, 10};
    for (int t = 0; t < 400; t++) begin
      threshold = 6'(th[t % 4]);
      fire  = $urandom & $urandom;
      valid = (t % 3 == 0) ? '1 : $urandom;
      chk();
    end
    valid = '1;
    foreach (th[k]) begin
      threshold = 6'(th[k]);
      fire = (32'd1 << (th[k] - 1)) - 1; chk();   // one short
      fire = (32'd1 << th[k]) - 1;       chk();   // exactly enough
    end
    // firing neurons outside the valid set do not count
    threshold = 4; valid = 32'h0000_000F; fire = 32'hFFFF_FFF0; chk();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
