// cluster_reco_top_tb: end-to-end test of the whole chain on a 27 x 27 pad
// array (the size of the paper's reconstruction test, Fig. 2), with the ADC
// on a 10 ns clock and the reconstruction on a 6 ns clock. Frames are sent
// back to back; every frame's records are compared with the flood-fill
// reference. The label table (128), input FIFO (64) and output FIFO (4) are
// made small so that every mechanism happens:
//   frame 0      a "complex case" of square, strip, diagonal, X and L shapes
//   frame 1      196 isolated electrodes: the labels run out after 127, the
//                frame must report overflow and give exactly the first 127
//   frames 2..13 random occupancy 5 % .. 60 %, random readout stalls
// Counted and required at least once: new cluster, join of a neighbour's
// cluster, merge of two marked clusters, fold during the end-of-frame pass,
// readout stall with a full output FIFO, full input FIFO, label overflow.
module cluster_reco_top_tb;
  import cluster_pkg::*;
  import cluster_ref_pkg::*;

  localparam int COLS = 27, ROWS = 27, N = 128, P = COLS*ROWS, NF = 14;
  localparam int LW = $clog2(N);
  localparam int unsigned THR = 200;

  logic adc_clk = 0, clk = 0, adc_rst_n = 0, rst_n = 0;
  logic adc_valid = 0, adc_ready, out_valid, out_ready = 0, frame_done, frame_overflow;
  sample_t adc_data = '0;
  sample_t threshold = sample_t'(THR);
  cluster_rec_t out_rec;
  logic [LW:0] frame_clusters;
  logic [$clog2(4):0] out_level;

  int checks = 0, failures = 0;
  int unsigned frames[NF][];
  cluster_rec_t got[$];
  int counts[$];
  bit overflows[$];
  int stall_pct = 0;
  int n_new = 0, n_join = 0, n_link = 0, n_fold = 0, n_out_stall = 0, n_in_full = 0, n_ovf = 0;

  cluster_reco_top #(.COLS(COLS), .ROWS(ROWS), .NLABELS(N), .IN_DEPTH(64), .OUT_DEPTH(4)) dut (.*);

  always #5 adc_clk = ~adc_clk;
  always #3 clk = ~clk;

  // mechanism counters
  always @(posedge clk) if (rst_n) begin
    if (dut.u_reco.acc_op == ACC_INIT)  n_new++;
    if (dut.u_reco.acc_op == ACC_ADD)   n_join++;
    if (dut.u_reco.acc_op == ACC_MERGE) n_fold++;
    if (dut.u_reco.link)                n_link++;
    if (dut.c_valid && !dut.c_ready)    n_out_stall++;
  end
  always @(posedge adc_clk) if (adc_rst_n && adc_valid && !adc_ready) n_in_full++;

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

  function automatic void put(int f, int x, int y, int unsigned v);
    if (x >= 0 && x < COLS && y >= 0 && y < ROWS) frames[f][y*COLS + x] = v;
  endfunction

  // ---------------- frames ----------------
  initial begin
    for (int f = 0; f < NF; f++) begin
      frames[f] = new[P];
      foreach (frames[f][i]) frames[f][i] = $urandom_range(THR);
    end
    // frame 0: complex case
    for (int x = 2; x < 6; x++) begin put(0, x, 25, 600 + 10*x); put(0, x+1, 24, 700); end   // two-row strip
    for (int x = 10; x < 12; x++) for (int y = 4; y < 7; y++) put(0, x, y, 900);           // square
    for (int i = 0; i < 5; i++) put(0, 4 + i, 11 + i, 800 + 50*i);                          // diagonal up
    for (int i = 0; i < 6; i++) put(0, 12 + i, 15 - i, 1500 - 100*i);                        // diagonal down
    for (int i = -2; i <= 2; i++) begin put(0, 19 + i, 18 + i, 1000); put(0, 19 + i, 18 - i, 1100); end // X
    for (int x = 19; x < 23; x++) put(0, x, 9, 2000); for (int y = 10; y < 13; y++) put(0, 22, y, 2500); // L
    put(0, 23, 12, 4095); put(0, 24, 11, 3000); put(0, 25, 10, 2222);                        // hook
    for (int x = 10; x < 16; x++) put(0, x, 25 - (x % 2), 1234);                             // zig-zag
    // frame 1: isolated electrodes
    for (int y = 0; y < ROWS; y += 2) for (int x = 0; x < COLS; x += 2) put(1, x, y, 300 + x + y);
    // random frames
    for (int f = 2; f < NF; f++) begin
      automatic int occ = 5 + (f - 2) * 5;
      foreach (frames[f][i]) if ($urandom_range(99) < occ) frames[f][i] = $urandom_range(THR + 1, 4095);
    end
  end

  // ---------------- ADC side ----------------
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

  // ---------------- readout side ----------------
  always @(negedge clk) out_ready = ($urandom_range(99) >= stall_pct);
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) got.push_back(out_rec);
    if (frame_done) begin
      counts.push_back(int'(frame_clusters));
      overflows.push_back(frame_overflow);
      if (frame_overflow) n_ovf++;
      stall_pct = (counts.size() % 3) * 40;
    end
  end

  // ---------------- check ----------------
  initial begin
    int pos = 0;
    wait (counts.size() == NF);
    stall_pct = 0;
    wait (!out_valid);
    repeat (10) @(posedge clk);
    for (int f = 0; f < NF; f++) begin
      automatic cluster_rec_t mine[$], exp[$];
      for (int k = 0; k < counts[f]; k++) mine.push_back(got[pos + k]);
      pos += counts[f];
      if (f == 1) begin
        // only the first N-1 isolated electrodes got a label
        automatic int unsigned kept[];
        automatic int seen = 0;
        kept = new[P];
        foreach (frames[1][i]) begin
          kept[i] = 0;
          if (frames[1][i] > THR && seen < N - 1) begin
            kept[i] = frames[1][i];
            seen++;
          end
        end
        ref_clusters(COLS, ROWS, kept, THR, exp);
        check(overflows[f], "frame 1 reports overflow");
      end else begin
        ref_clusters(COLS, ROWS, frames[f], THR, exp);
        check(!overflows[f], $sformatf("frame %0d without overflow", f));
      end
      check(mine.size() == exp.size(),
            $sformatf("frame %0d: %0d clusters, expected %0d", f, mine.size(), exp.size()));
      check(count_matches(mine, exp) == exp.size(),
            $sformatf("frame %0d: all records match the reference", f));
    end
    check(pos == got.size(), "no records beyond the frames");
    $display("new %0d join %0d merge %0d fold %0d out_stall %0d in_full %0d overflow %0d",
             n_new, n_join, n_link, n_fold, n_out_stall, n_in_full, n_ovf);
    check(n_new > 0, "new clusters started");
    check(n_join > 0, "electrodes joined neighbours");
    check(n_link > 0, "marked clusters merged");
    check(n_fold > 0, "records folded in the end-of-frame pass");
    check(n_out_stall > 0, "output FIFO stalled the reconstruction");
    check(n_in_full > 0, "input FIFO filled");
    check(n_ovf > 0, "label overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
