// hit_discriminator_tb: checks the fired flag against sample > threshold for
// the corner values and for random samples and thresholds.
module hit_discriminator_tb;
  import cluster_pkg::*;

  sample_t sample, threshold;
  logic    hit;
  int      checks = 0, failures = 0;

  hit_discriminator dut (.sample(sample), .threshold(threshold), .hit(hit));

  task automatic check(int unsigned s, int unsigned t);
    sample = QW'(s);
    threshold = QW'(t);
    #1;
    checks++;
    if (hit !== (s > t)) begin
      failures++;
      $display("FAIL sample=%0d threshold=%0d hit=%0b", s, t, hit);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(0, 0);
    check(1, 0);
    check(100, 100);
    check(101, 100);
    check(99, 100);
    check(4095, 4095);
    check(4095, 4094);
    check(0, 4095);
    for (int i = 0; i < 2000; i++) begin
      automatic int unsigned t = $urandom_range(4095);
      automatic int unsigned s = (i % 3 == 0) ? t + $urandom_range(2) - 1 : $urandom_range(4095);
      if (s > 4095) s = 4095;
      check(s, t);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
