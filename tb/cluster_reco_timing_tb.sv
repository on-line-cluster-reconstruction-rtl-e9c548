// cluster_reco_timing_tb: processing time against occupancy, the measurement
// of Fig. 3 of the paper, on a default-size 167 x 167 frame. For occupancies
// of 2, 10, 33, 40 and 100 % of fired electrodes (placed at random), one
// electrode is offered every cycle and the readout is always ready. The test
// reports the period: cycles from the first electrode to frame_done, divided
// by the number of electrodes (1.0 would mean no cycle beyond one per input).
// It checks the records against the reference, and that the cycle count is
// exactly P + U + L + 1 (P electrodes, U cycles spent merging marked
// clusters, L labels), as the controller's schedule states.
module cluster_reco_timing_tb;
  import cluster_pkg::*;
  import cluster_ref_pkg::*;

  localparam int COLS = 167, ROWS = 167, P = COLS*ROWS, LW = 13;
  localparam int unsigned THR = 100;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_hit = 0, out_valid, out_ready = 1, frame_done, frame_overflow;
  sample_t in_q = '0;
  cluster_rec_t out_rec;
  logic [LW:0] frame_clusters;
  int checks = 0, failures = 0;
  int unsigned q[];
  cluster_rec_t got[$], exp[$];
  int n_union = 0, n_alloc = 0;
  int ratios[5] = '{2, 10, 33, 40, 100};

  cluster_reco dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (dut.state == dut.S_UNION) n_union++;
    if (dut.alloc) n_alloc++;
    if (out_valid && out_ready) got.push_back(out_rec);
  end

  initial begin
    #50ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    q = new[P];
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (ratios[r]) begin
      automatic longint t0 = 0, t1 = 0;
      automatic int cycles, fired = 0;
      foreach (q[i]) begin
        q[i] = ($urandom_range(999) < ratios[r] * 10) ? $urandom_range(THR + 1, 4095) : $urandom_range(THR);
        if (q[i] > THR) fired++;
      end
      got.delete();
      n_union = 0;
      n_alloc = 0;
      for (int i = 0; i < P; i++) begin
        @(negedge clk);
        in_valid = 1;
        in_q = QW'(q[i]);
        in_hit = (q[i] > THR);
        @(posedge clk);
        if (i == 0) t0 = $time;
        while (!in_ready) @(posedge clk);
      end
      @(negedge clk);
      in_valid = 0;
      while (!frame_done) @(posedge clk);
      t1 = $time;
      cycles = int'((t1 - t0) / 10);
      ref_clusters(COLS, ROWS, q, THR, exp);
      $display("occupancy %3d %%: %0d fired, %0d clusters, %0d labels, %0d merge cycles, period %0.3f",
               ratios[r], fired, exp.size(), n_alloc, n_union, real'(cycles) / P);
      check(!frame_overflow, "no overflow");
      check(got.size() == exp.size(), "cluster count");
      check(count_matches(got, exp) == exp.size(), "records match");
      check(cycles == P + n_union + n_alloc + 1,
            $sformatf("cycles %0d expected %0d", cycles, P + n_union + n_alloc + 1));
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
