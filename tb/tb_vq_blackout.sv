// tb_vq_blackout: self-checking test of vq_blackout. Pairs of largest and
// smallest block sums are applied, including differences of exactly 4 and 5
// around the threshold, and the flag is compared with "1 unless
// max - min > 4".
module tb_vq_blackout;
  import vq_pkg::*;

  block_sum_t max1, min1;
  logic       blackout;
  int checks = 0, failures = 0;

  vq_blackout dut (.*);

  task automatic apply(int unsigned mx, int unsigned mn);
    bit want;
    max1 = 16'(mx);
    min1 = 16'(mn);
    #1;
    want = !((mx - mn) > 4);
    checks++;
    if (blackout !== want) begin
      failures++;
      $display("FAIL: max %0d min %0d: blackout %0d, expected %0d", mx, mn, blackout, want);
    end
  endtask

  initial begin
    apply(0, 0);
    apply(16320, 16320);
    apply(104, 100);
    apply(105, 100);
    apply(103, 100);
    apply(16320, 0);
    apply(4, 0);
    apply(5, 0);
    for (int i = 0; i < 200; i++) begin
      int unsigned mn = $urandom_range(16320);
      apply(mn + $urandom_range(8), mn);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
