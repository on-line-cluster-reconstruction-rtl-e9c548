// label_line_buffer: cluster labels of the row below the electrode being
// checked, and of the electrodes already checked in its own row.
//
// Electrodes arrive row by row, each row from X = 0 upwards, starting with the
// bottom row (the order of the numbers in the paper's Fig. 1). When electrode
// (x, y) is checked, its four already-checked neighbours are the left one
// (x-1, y) and the three below it (x-1, y-1), (x, y-1), (x+1, y-1). The buffer
// is one row of COLS labels: entry x is overwritten by the label of (x, y)
// when that electrode is done. Entry x-1 then already holds the label of the
// left neighbour, so the old content of entry x-1, the lower-left neighbour,
// is kept in a register at the moment it is overwritten.
//
// Label 0 means "not fired / no cluster". Neighbours outside the frame read
// as 0: nothing below row 0, nothing left of column 0, nothing right of
// column COLS-1. The buffer is not cleared between frames; row 0 ignores it.
//
// Interface: x and first_row select the electrode; left, lower_left, lower,
// lower_right are combinational. On a cycle with we = 1 entry x takes wlabel.
// Writes must come in the order the electrodes arrive, one per electrode.
module label_line_buffer #(
  parameter int unsigned COLS = 167,
  parameter int unsigned LW   = 13     // label width
) (
  input  logic                      clk,
  input  logic [$clog2(COLS)-1:0]   x,
  input  logic                      first_row,   // electrode is in row 0
  output logic [LW-1:0]             left,
  output logic [LW-1:0]             lower_left,
  output logic [LW-1:0]             lower,
  output logic [LW-1:0]             lower_right,
  input  logic                      we,
  input  logic [LW-1:0]             wlabel
);

  localparam int unsigned XW = $clog2(COLS);

  logic [LW-1:0] row [COLS];
  logic [LW-1:0] saved;        // entry x-1 as it was before its last write

  logic at_left_edge, at_right_edge;
  assign at_left_edge  = (x == '0);
  assign at_right_edge = (x == XW'(COLS-1));

  always_comb begin
    left        = at_left_edge ? '0 : row[x - XW'(1)];
    lower_left  = (at_left_edge  || first_row) ? '0 : saved;
    lower       = first_row ? '0 : row[x];
    lower_right = (at_right_edge || first_row) ? '0 : row[x + XW'(1)];
  end

  always_ff @(posedge clk) begin
    if (we) begin
      row[x] <= wlabel;
      saved  <= row[x];
    end
  end

endmodule
