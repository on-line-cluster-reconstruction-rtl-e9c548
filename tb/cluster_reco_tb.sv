// cluster_reco_tb: frames of a 10 x 10 pad array through the reconstruction
// controller, each checked against the flood-fill reference of
// cluster_ref_pkg (every record, the cluster count, no overflow).
//   1. The pattern of Fig. 1 of the paper: 19 fired electrodes that form
//      four clusters once the marked clusters are merged; two of the
//      joins (electrodes 12 and 15) need a merge of separate labels.
//   2. Horizontal strips only, input always valid and output always ready:
//      the frame must take exactly P + L + 1 cycles (P electrodes, L clusters).
//   3. Random frames at several occupancies, with random input gaps and
//      random output stalls.
module cluster_reco_tb;
  import cluster_pkg::*;
  import cluster_ref_pkg::*;

  localparam int COLS = 10, ROWS = 10, N = 64, LW = 6, P = COLS*ROWS;
  localparam int unsigned THR = 100;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_hit = 0, out_valid, out_ready = 0, frame_done, frame_overflow;
  sample_t in_q = '0;
  cluster_rec_t out_rec;
  logic [LW:0] frame_clusters;
  int checks = 0, failures = 0, links = 0;
  int unsigned q[];
  cluster_rec_t got[$], exp[$];
  int in_gap_pct = 0, stall_pct = 0;

  cluster_reco #(.COLS(COLS), .ROWS(ROWS), .NLABELS(N), .LW(LW)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (dut.link) links++;

  initial begin
    repeat (200000) @(posedge clk);
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

  // Feed one frame, collect its records; returns the cycles from the first
  // accepted electrode to frame_done.
  task automatic run_frame(output int cycles);
    longint start = -1, stop = 0;
    bit done = 0;
    got.delete();
    fork
      begin
        for (int i = 0; i < P; i++) begin
          @(negedge clk);
          while ($urandom_range(99) < in_gap_pct) begin
            in_valid = 0;
            @(negedge clk);
          end
          in_valid = 1;
          in_q = QW'(q[i]);
          in_hit = (q[i] > THR);
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          if (start < 0) start = $time;
        end
        @(negedge clk);
        in_valid = 0;
      end
      begin
        while (!done) begin
          @(negedge clk);
          out_ready = ($urandom_range(99) >= stall_pct);
          @(posedge clk);
          if (out_valid && out_ready) got.push_back(out_rec);
          if (frame_done) begin
            done = 1;
            stop = $time;
            check(frame_clusters == (LW+1)'(got.size()), "frame_clusters equals records sent");
            check(!frame_overflow, "no overflow");
          end
        end
      end
    join
    cycles = int'((stop - start) / 10);
    ref_clusters(COLS, ROWS, q, THR, exp);
    check(got.size() == exp.size(), $sformatf("cluster count %0d expected %0d", got.size(), exp.size()));
    check(count_matches(got, exp) == exp.size(), "every record matches the reference");
  endtask

  function automatic void set(int x, int y, int unsigned v);
    q[y*COLS + x] = v;
  endfunction

  initial begin
    int cycles, nl;
    q = new[P];
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. Fig. 1: electrode order numbers 1..19, (x, y) with y = 0 the bottom row.
    foreach (q[i]) q[i] = $urandom_range(THR);
    set(1,1,500); set(2,1,900); set(3,1,700); set(6,1,300); set(7,1,400);   // 1-5
    set(2,2,600); set(3,2,800);                                             // 6-7
    set(7,3,350); set(8,3,450);                                             // 8-9
    set(4,4,1000); set(5,4,1200); set(6,4,1100);                            // 10-12
    set(1,5,200); set(2,5,2000); set(3,5,4095);                             // 13-15
    set(2,7,150); set(3,7,250);                                             // 16-17
    set(4,8,101); set(5,8,333);                                             // 18-19
    links = 0;
    run_frame(cycles);
    check(exp.size() == 4, "Fig. 1 pattern has four clusters");
    check(links == 2, $sformatf("Fig. 1 pattern needs two merges, saw %0d", links));

    // 2. exact timing without merges
    foreach (q[i]) q[i] = 0;
    nl = 0;
    for (int y = 0; y < ROWS; y += 2) begin
      for (int x = (y % 4); x < (y % 4) + 5; x++) set(x, y, 1000 + x);
      nl++;
    end
    in_gap_pct = 0;
    stall_pct = 0;
    run_frame(cycles);
    check(cycles == P + nl + 1, $sformatf("frame took %0d cycles, expected %0d", cycles, P + nl + 1));

    // 3. random frames
    for (int f = 0; f < 60; f++) begin
      automatic int occ = (f % 6) * 15 + 5;
      foreach (q[i]) q[i] = ($urandom_range(99) < occ) ? $urandom_range(THR + 1, 4095) : $urandom_range(THR);
      in_gap_pct = (f % 3) * 20;
      stall_pct  = (f % 4) * 25;
      run_frame(cycles);
    end
    $display("merges seen: %0d", links);
    check(links > 0, "random frames needed merges");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
