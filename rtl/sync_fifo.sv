// sync_fifo: single-clock FIFO that holds finished cluster records until the
// readout takes them.
//
// A DEPTH-word memory with read and write pointers one bit wider than the
// address. Write side: in_valid/in_ready, a word is stored when both are 1.
// Read side: first-word fall-through, out_data is the head word while
// out_valid is 1 and it is removed when out_ready is also 1. A write into a
// full FIFO is refused (in_ready is 0), even if a read frees a word in the
// same cycle. The paper only says that the cluster quantities "will be stored
// in the FIFO and wait to be transmitted"; depth and handshake are this
// design's choice.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 64    // power of two
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH):0] level   // words held
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wptr, rptr;

  assign level     = wptr - rptr;
  assign in_ready  = (level != (AW+1)'(DEPTH));
  assign out_valid = (level != '0);
  assign out_data  = mem[rptr[AW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (in_valid && in_ready)   wptr <= wptr + (AW+1)'(1);
      if (out_valid && out_ready) rptr <= rptr + (AW+1)'(1);
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[wptr[AW-1:0]] <= in_data;
  end

  initial begin
    assert (DEPTH >= 2 && (1 << AW) == DEPTH)
      else $error("sync_fifo: DEPTH must be a power of two >= 2");
  end

endmodule
