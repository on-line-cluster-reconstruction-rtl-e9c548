// sync_fifo_tb: random writes and reads against a queue model. Checks the
// data order, the level output, that a full FIFO refuses writes and that an
// empty one shows no data.
module sync_fifo_tb;
  localparam int W = 16, D = 8;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data = '0, out_data;
  logic [$clog2(D):0] level;
  int checks = 0, failures = 0, fulls = 0;
  logic [W-1:0] model[$];

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      // phases: mostly write, then mostly read, then random
      automatic int wp = (cyc % 1000 < 300) ? 90 : (cyc % 1000 < 600) ? 10 : 50;
      @(negedge clk);
      in_valid  = ($urandom_range(99) < wp);
      in_data   = W'($urandom);
      out_ready = ($urandom_range(99) < 100 - wp);
      #1;
      checks++;
      if (level != model.size() || in_ready != (model.size() < D) ||
          out_valid != (model.size() > 0)) begin
        failures++;
        $display("FAIL level=%0d model=%0d in_ready=%0b out_valid=%0b",
                 level, model.size(), in_ready, out_valid);
      end
      if (model.size() == D) fulls++;
      if (out_valid) begin
        checks++;
        if (out_data !== model[0]) begin
          failures++;
          $display("FAIL data %h expected %h", out_data, model[0]);
        end
      end
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
    end
    checks++;
    if (fulls == 0) begin
      failures++;
      $display("FAIL the FIFO never filled");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
