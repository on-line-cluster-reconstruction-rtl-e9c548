// async_fifo_tb: writer and reader on unrelated clocks (10 ns and 7 ns) with
// random valid/ready. Every word read is compared with a queue of the words
// written. Checks that the FIFO fills (wready drops) in a phase where the
// reader is slow, that it drains, and that no word is lost or doubled.
module async_fifo_tb;
  localparam int W = 12, D = 16;

  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  logic wvalid = 0, wready, rvalid, rready = 0;
  logic [W-1:0] wdata = '0, rdata;
  int checks = 0, failures = 0, full_cycles = 0, nread = 0, nwritten = 0;
  logic [W-1:0] model[$];
  bit slow_reader = 0;

  async_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5   wclk = ~wclk;
  always #3.5 rclk = ~rclk;

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // writer
  initial begin
    repeat (3) @(posedge wclk);
    wrst_n = 1;
    rrst_n = 1;
    repeat (3) @(posedge wclk);
    for (int cyc = 0; cyc < 6000; cyc++) begin
      @(negedge wclk);
      slow_reader = (cyc % 2000) < 700;
      wvalid = ($urandom_range(99) < 70);
      wdata  = W'($urandom);
      @(posedge wclk);
      if (!wready) full_cycles++;
      if (wvalid && wready) begin
        model.push_back(wdata);
        nwritten++;
      end
    end
    @(negedge wclk);
    wvalid = 0;
  end

  // reader
  initial begin
    @(posedge rrst_n);
    forever begin
      @(negedge rclk);
      rready = slow_reader ? ($urandom_range(99) < 10) : ($urandom_range(99) < 80);
      @(posedge rclk);
      if (rvalid && rready) begin
        checks++;
        if (model.size() == 0) begin
          failures++;
          $display("FAIL read %h from an empty model", rdata);
        end else begin
          logic [W-1:0] e;
          e = model.pop_front();
          if (rdata !== e) begin
            failures++;
            $display("FAIL read %h expected %h", rdata, e);
          end
        end
        nread++;
      end
    end
  end

  initial begin
    #150000;
    wait (nwritten > 0 && model.size() == 0 && !wvalid);
    repeat (20) @(posedge rclk);
    checks++;
    if (rvalid) begin
      failures++;
      $display("FAIL rvalid with nothing left");
    end
    checks++;
    if (full_cycles == 0) begin
      failures++;
      $display("FAIL the FIFO never filled");
    end
    checks++;
    if (nread != nwritten) begin
      failures++;
      $display("FAIL read %0d words, wrote %0d", nread, nwritten);
    end
    $display("written %0d, full for %0d write cycles", nwritten, full_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
