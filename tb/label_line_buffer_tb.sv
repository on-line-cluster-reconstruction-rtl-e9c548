// label_line_buffer_tb: writes random labels for several rows of a frame,
// electrode by electrode in raster order, and checks the four neighbour
// labels of every electrode against a full 2-D copy of everything written.
// Covers the edges: row 0, column 0 and the last column.
module label_line_buffer_tb;
  localparam int COLS = 9, ROWS = 7, LW = 6, FRAMES = 3;

  logic clk = 0;
  logic [$clog2(COLS)-1:0] x = '0;
  logic first_row = 1;
  logic [LW-1:0] left, lower_left, lower, lower_right, wlabel = '0;
  logic we = 0;
  int checks = 0, failures = 0;
  int img[ROWS][COLS];

  label_line_buffer #(.COLS(COLS), .LW(LW)) dut (.*);

  always #5 clk = ~clk;

  function automatic int at(int xx, int yy);
    if (xx < 0 || xx >= COLS || yy < 0) return 0;
    return img[yy][xx];
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int f = 0; f < FRAMES; f++)
      for (int yy = 0; yy < ROWS; yy++)
        for (int xx = 0; xx < COLS; xx++) begin
          @(negedge clk);
          x = ($clog2(COLS))'(xx);
          first_row = (yy == 0);
          we = 1;
          wlabel = ($urandom_range(2) == 0) ? '0 : LW'($urandom_range(1, (1 << LW) - 1));
          #1;
          checks++;
          if (left != LW'(at(xx-1, yy)) || lower_left != LW'(at(xx-1, yy-1)) ||
              lower != LW'(at(xx, yy-1)) || lower_right != LW'(at(xx+1, yy-1))) begin
            failures++;
            $display("FAIL f%0d (%0d,%0d): got %0d %0d %0d %0d expected %0d %0d %0d %0d",
                     f, xx, yy, left, lower_left, lower, lower_right,
                     at(xx-1, yy), at(xx-1, yy-1), at(xx, yy-1), at(xx+1, yy-1));
          end
          img[yy][xx] = int'(wlabel);
          @(posedge clk);
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
