// cluster_reco_strip_tb: the strip-readout case of the paper's X-ray data,
// where one readout plane is treated as a 1 x 167 array. Each frame is one
// trigger: one or two X-ray hits of 3 to 4 adjacent strips with a peaked
// charge, on top of sub-threshold noise. The records are compared with the
// reference; the centre of gravity sum(X*Q)/sum(Q) is printed for the first
// frames as it would be computed downstream.
module cluster_reco_strip_tb;
  import cluster_pkg::*;
  import cluster_ref_pkg::*;

  localparam int COLS = 167, ROWS = 1, N = 128, LW = 7;
  localparam int unsigned THR = 80;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_hit = 0, out_valid, out_ready = 1, frame_done, frame_overflow;
  sample_t in_q = '0;
  cluster_rec_t out_rec;
  logic [LW:0] frame_clusters;
  int checks = 0, failures = 0;
  int unsigned q[];
  cluster_rec_t got[$], exp[$];

  cluster_reco #(.COLS(COLS), .ROWS(ROWS), .NLABELS(N), .LW(LW)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (out_valid && out_ready) got.push_back(out_rec);

  initial begin
    #10ms;
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
    q = new[COLS];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 200; f++) begin
      automatic int nhits = $urandom_range(1, 2);
      foreach (q[i]) q[i] = $urandom_range(THR);
      for (int h = 0; h < nhits; h++) begin
        automatic int w = $urandom_range(3, 4);
        automatic int x0 = $urandom_range(0, COLS - w);
        automatic int peak = $urandom_range(500, 4095);
        for (int k = 0; k < w; k++) begin
          automatic int d = (2*k - (w-1)) * (2*k - (w-1));
          q[x0 + k] = peak / (1 + d / 2);
          if (q[x0 + k] <= THR) q[x0 + k] = THR + 1;
        end
      end
      got.delete();
      for (int i = 0; i < COLS; i++) begin
        @(negedge clk);
        in_valid = 1;
        in_q = QW'(q[i]);
        in_hit = (q[i] > THR);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
      @(negedge clk);
      in_valid = 0;
      while (!frame_done) @(posedge clk);
      ref_clusters(COLS, ROWS, q, THR, exp);
      check(got.size() == exp.size(), $sformatf("frame %0d cluster count", f));
      check(count_matches(got, exp) == exp.size(), $sformatf("frame %0d records match", f));
      foreach (got[g]) check(got[g].ymin == 0 && got[g].ymax == 0 && got[g].sum_y == 0, "one row only");
      if (f < 3)
        foreach (got[g])
          $display("frame %0d: strips %0d..%0d, centre of gravity %0.2f", f, got[g].xmin, got[g].xmax,
                   real'(got[g].sum_xq) / real'(got[g].sum_q));
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
