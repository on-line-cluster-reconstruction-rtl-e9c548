// cluster_reco_top_full_tb: the whole design at its default size, a
// 167 x 167 pad array with 8192 labels, run through two complete frames.
// Frame 0 holds 150 X-ray-like hits: blobs of 3 to 4 electrodes per side with
// a peaked charge, placed at random and sometimes touching. Frame 1 is random
// at 25 % occupancy. The ADC runs on a 10 ns clock, the reconstruction on a
// 4 ns clock, the readout is always ready. Every record of every frame is
// compared with the flood-fill reference.
module cluster_reco_top_full_tb;
  import cluster_pkg::*;
  import cluster_ref_pkg::*;

  localparam int COLS = 167, ROWS = 167, P = COLS*ROWS, NF = 2;
  localparam int unsigned THR = 150;

  logic adc_clk = 0, clk = 0, adc_rst_n = 0, rst_n = 0;
  logic adc_valid = 0, adc_ready, out_valid, out_ready = 1, frame_done, frame_overflow;
  sample_t adc_data = '0;
  sample_t threshold = sample_t'(THR);
  cluster_rec_t out_rec;
  logic [13:0] frame_clusters;
  logic [6:0] out_level;

  int checks = 0, failures = 0;
  int unsigned frames[NF][];
  cluster_rec_t got[$];
  int counts[$];
  bit overflows[$];

  cluster_reco_top dut (.*);

  always #5 adc_clk = ~adc_clk;
  always #2 clk = ~clk;

  initial begin
    #20ms;
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
    for (int f = 0; f < NF; f++) begin
      frames[f] = new[P];
      foreach (frames[f][i]) frames[f][i] = $urandom_range(THR);
    end
    for (int h = 0; h < 150; h++) begin
      automatic int w = $urandom_range(3, 4);
      automatic int x0 = $urandom_range(0, COLS - w);
      automatic int y0 = $urandom_range(0, ROWS - w);
      automatic int peak = $urandom_range(1000, 4000);
      for (int dy = 0; dy < w; dy++)
        for (int dx = 0; dx < w; dx++) begin
          automatic int d = (2*dx - (w-1)) * (2*dx - (w-1)) + (2*dy - (w-1)) * (2*dy - (w-1));
          automatic int unsigned v = peak / (1 + d / 2);
          if (v > THR) frames[0][(y0 + dy)*COLS + x0 + dx] = v;
        end
    end
    foreach (frames[1][i]) if ($urandom_range(99) < 25) frames[1][i] = $urandom_range(THR + 1, 4095);
  end

  initial begin
    repeat (4) @(posedge adc_clk);
    adc_rst_n = 1;
    rst_n = 1;
    repeat (4) @(posedge adc_clk);
    for (int f = 0; f < NF; f++)
      for (int i = 0; i < P; i++) begin
        @(negedge adc_clk);
        adc_valid = 1;
        adc_data  = QW'(frames[f][i]);
        @(posedge adc_clk);
        while (!adc_ready) @(posedge adc_clk);
      end
    @(negedge adc_clk);
    adc_valid = 0;
  end

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) got.push_back(out_rec);
    if (frame_done) begin
      counts.push_back(int'(frame_clusters));
      overflows.push_back(frame_overflow);
    end
  end

  initial begin
    automatic int pos = 0;
    wait (counts.size() == NF);
    wait (!out_valid);
    repeat (10) @(posedge clk);
    for (int f = 0; f < NF; f++) begin
      automatic cluster_rec_t mine[$], exp[$];
      for (int k = 0; k < counts[f]; k++) mine.push_back(got[pos + k]);
      pos += counts[f];
      ref_clusters(COLS, ROWS, frames[f], THR, exp);
      $display("frame %0d: %0d clusters, reference %0d", f, mine.size(), exp.size());
      check(!overflows[f], $sformatf("frame %0d without overflow", f));
      check(mine.size() == exp.size(), $sformatf("frame %0d cluster count", f));
      check(count_matches(mine, exp) == exp.size(), $sformatf("frame %0d records match", f));
    end
    check(pos == got.size(), "no records beyond the frames");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
