// cluster_acc_table: the running cluster quantities of every provisional label.
//
// Entry L holds the record of all electrodes that got label L (sum X*Q,
// sum Y*Q, sum Q, sum X, sum Y, Xmin, Xmax, Ymin, Ymax; see cluster_pkg).
// One operation per cycle on entry dst:
//   ACC_INIT  entry dst := record of the single electrode (px, py, pq)
//   ACC_ADD   entry dst := entry dst + electrode (px, py, pq)
//   ACC_MERGE entry dst := entry dst + entry src   (sums added, box widened)
// The read-modify-write is done in the cycle of the request: both entries are
// read combinationally and the result is written at the clock edge. src_rec
// shows entry src combinationally, which the controller uses to emit a
// finished cluster. Entries are not reset: ACC_INIT starts each new label.
module cluster_acc_table
  import cluster_pkg::*;
#(
  parameter int unsigned NLABELS = 8192,
  parameter int unsigned LW      = $clog2(NLABELS)
) (
  input  logic         clk,
  input  acc_op_e      op,
  input  logic [LW-1:0] dst,
  input  coord_t       px,
  input  coord_t       py,
  input  sample_t      pq,
  input  logic [LW-1:0] src,
  output cluster_rec_t src_rec
);

  cluster_rec_t mem [NLABELS];
  cluster_rec_t dst_rec, pix, next_rec;

  assign dst_rec = mem[dst];
  assign src_rec = mem[src];
  assign pix     = pixel_rec(px, py, pq);

  always_comb begin
    unique case (op)
      ACC_INIT:  next_rec = pix;
      ACC_ADD:   next_rec = merge_rec(dst_rec, pix);
      ACC_MERGE: next_rec = merge_rec(dst_rec, src_rec);
      default:   next_rec = dst_rec;
    endcase
  end

  always_ff @(posedge clk) begin
    if (op != ACC_NOP) mem[dst] <= next_rec;
  end

endmodule
