// cluster_reco: serial cluster reconstruction of one frame of electrodes.
//
// Electrodes arrive one per accepted cycle in raster order: row 0 (the bottom
// row) first, each row from column 0 to COLS-1, ROWS rows per frame, frames
// back to back. Each arrives with its charge and its fired flag from the
// threshold. The frame position is counted here; there is no frame marker.
//
// Scan phase (state SCAN, one cycle per electrode). The labels of the four
// already-checked neighbours (left, lower-left, lower, lower-right) come from
// label_line_buffer. A fired electrode whose checked neighbours are all
// unfired starts a new cluster: it gets the next free label, a new entry in
// the accumulator table and an entry in the equivalence table. A fired
// electrode with a fired neighbour joins that neighbour's cluster (the first
// of left, lower-left, lower, lower-right that is fired) and is added to its
// accumulator entry. These are the rules of the paper. Only one situation
// can join two clusters that were still separate: the lower neighbour is
// unfired while the lower-right and one of left/lower-left are fired (the
// paper's electrode 12 in Fig. 1). The other neighbour pairs touch each other
// and were joined when the later of them was checked. In that case the
// controller spends extra cycles in state UNION: both labels are walked up
// the equivalence table in parallel, one step per cycle, and the two roots are
// linked, larger to smaller. Meanwhile no electrode is accepted.
//
// Merge phase (state MERGE, after the last electrode of the frame). The paper
// re-merges the marked clusters after all electrodes have been assigned. Here
// labels are visited from the highest down, one per cycle. Because a parent
// label is always smaller than its child, a non-root label L can fold its
// record into parent[L]; that parent is visited later and has by then gathered
// all of its children. A root label is a finished cluster: its record is sent
// on out_* and the sweep waits while out_ready is 0. A one-cycle DONE state
// then pulses frame_done with the cluster count and clears the label counter.
//
// Timing: with out_ready held at 1, a frame of P electrodes that uses L labels
// and needs U union steps takes P + U + L + 1 cycles from its first accepted
// electrode to frame_done; in_ready is 0 during UNION, MERGE and DONE.
// Labels 1 .. NLABELS-1 are available; label 0 means unfired. A fired
// electrode that would need a new label when none is left is dropped and
// frame_overflow is reported. The default NLABELS = 8192 covers the worst
// case of a 167 x 167 frame (84 x 84 isolated electrodes), so the default
// configuration cannot overflow. The label memory and its sizing, the
// union-find form of the merge marks and the one-cycle-per-electrode schedule
// are this design's choices; the paper's own module takes 4 to 8 input periods
// per electrode (its Fig. 3).
module cluster_reco
  import cluster_pkg::*;
#(
  parameter int unsigned COLS    = 167,
  parameter int unsigned ROWS    = 167,
  parameter int unsigned NLABELS = 8192,
  parameter int unsigned LW      = $clog2(NLABELS)
) (
  input  logic          clk,
  input  logic          rst_n,
  // electrode stream
  input  logic          in_valid,
  output logic          in_ready,
  input  sample_t       in_q,
  input  logic          in_hit,
  // finished clusters
  output logic          out_valid,
  input  logic          out_ready,
  output cluster_rec_t  out_rec,
  // end of frame
  output logic          frame_done,      // one-cycle pulse
  output logic [LW:0]   frame_clusters,  // clusters sent for this frame
  output logic          frame_overflow   // electrodes were dropped for lack of labels
);

  localparam int unsigned XW = (COLS > 1) ? $clog2(COLS) : 1;
  localparam int unsigned YW = (ROWS > 1) ? $clog2(ROWS) : 1;

  typedef enum logic [1:0] {S_SCAN, S_UNION, S_MERGE, S_DONE} state_e;

  state_e        state;
  logic [XW-1:0] x;
  logic [YW-1:0] y;
  logic [LW:0]   next_label;   // first free label
  logic [LW-1:0] ua, ub;       // labels being walked to their roots
  logic          frame_end;    // last electrode taken, merge comes next
  logic [LW-1:0] mlabel;       // label visited by the merge sweep
  logic [LW:0]   nclusters;
  logic          overflow;

  // ---------------- neighbourhood ----------------
  logic [LW-1:0] n_left, n_ll, n_lo, n_lr;
  logic          lb_we;
  logic [LW-1:0] lb_wlabel;

  label_line_buffer #(.COLS(COLS), .LW(LW)) u_line (
    .clk        (clk),
    .x          (x),
    .first_row  (y == '0),
    .left       (n_left),
    .lower_left (n_ll),
    .lower      (n_lo),
    .lower_right(n_lr),
    .we         (lb_we),
    .wlabel     (lb_wlabel)
  );

  logic [LW-1:0] join_label;
  logic          fire, last_pixel, can_alloc, need_new, need_union, alloc;

  always_comb begin
    if      (n_left != '0) join_label = n_left;
    else if (n_ll   != '0) join_label = n_ll;
    else if (n_lo   != '0) join_label = n_lo;
    else                   join_label = n_lr;
  end

  assign in_ready   = (state == S_SCAN);
  assign fire       = in_valid && in_ready;
  assign last_pixel = (x == XW'(COLS-1)) && (y == YW'(ROWS-1));
  assign can_alloc  = (next_label < (LW+1)'(NLABELS));
  assign need_new   = in_hit && (join_label == '0);
  assign alloc      = fire && need_new && can_alloc;
  assign need_union = in_hit && (n_lr != '0) && (n_lo == '0) && (join_label != n_lr);

  assign lb_we     = fire;
  assign lb_wlabel = !in_hit          ? '0 :
                     (join_label != '0) ? join_label :
                     can_alloc        ? next_label[LW-1:0] : '0;

  // ---------------- equivalence table ----------------
  logic [LW-1:0] ra_label, ra_parent, rb_parent;
  logic          link;

  assign ra_label = (state == S_MERGE) ? mlabel : ua;

  equiv_table #(.NLABELS(NLABELS), .LW(LW)) u_equiv (
    .clk        (clk),
    .ra_label   (ra_label),
    .ra_parent  (ra_parent),
    .rb_label   (ub),
    .rb_parent  (rb_parent),
    .alloc      (alloc),
    .alloc_label(next_label[LW-1:0]),
    .link       (link),
    .link_a     (ua),
    .link_b     (ub)
  );

  logic union_roots;  // both walks have reached a root
  assign union_roots = (ra_parent == ua) && (rb_parent == ub);
  assign link        = (state == S_UNION) && union_roots && (ua != ub);

  // ---------------- accumulator table ----------------
  acc_op_e       acc_op;
  logic [LW-1:0] acc_dst;
  logic          m_root;

  assign m_root = (ra_parent == mlabel);

  always_comb begin
    acc_op  = ACC_NOP;
    acc_dst = join_label;
    if (state == S_SCAN) begin
      if (fire && in_hit && join_label != '0) begin
        acc_op  = ACC_ADD;
        acc_dst = join_label;
      end else if (alloc) begin
        acc_op  = ACC_INIT;
        acc_dst = next_label[LW-1:0];
      end
    end else if (state == S_MERGE && mlabel != '0 && !m_root) begin
      acc_op  = ACC_MERGE;
      acc_dst = ra_parent;
    end
  end

  cluster_acc_table #(.NLABELS(NLABELS), .LW(LW)) u_acc (
    .clk    (clk),
    .op     (acc_op),
    .dst    (acc_dst),
    .px     (coord_t'(x)),
    .py     (coord_t'(y)),
    .pq     (in_q),
    .src    (mlabel),
    .src_rec(out_rec)
  );

  assign out_valid      = (state == S_MERGE) && (mlabel != '0) && m_root;
  assign frame_done     = (state == S_DONE);
  assign frame_clusters = nclusters;
  assign frame_overflow = overflow;

  // ---------------- control ----------------
  logic [LW:0] next_label_d;
  assign next_label_d = next_label + (LW+1)'(alloc);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_SCAN;
      x          <= '0;
      y          <= '0;
      next_label <= (LW+1)'(1);
      ua         <= '0;
      ub         <= '0;
      frame_end  <= 1'b0;
      mlabel     <= '0;
      nclusters  <= '0;
      overflow   <= 1'b0;
    end else begin
      unique case (state)
        S_SCAN: if (fire) begin
          next_label <= next_label_d;
          if (in_hit && need_new && !can_alloc) overflow <= 1'b1;
          if (x == XW'(COLS-1)) begin
            x <= '0;
            y <= (y == YW'(ROWS-1)) ? '0 : y + YW'(1);
          end else begin
            x <= x + XW'(1);
          end
          frame_end <= last_pixel;
          mlabel    <= LW'(next_label_d - (LW+1)'(1));
          if (need_union) begin
            ua    <= join_label;
            ub    <= n_lr;
            state <= S_UNION;
          end else if (last_pixel) begin
            state <= S_MERGE;
          end
        end
        S_UNION: begin
          if (union_roots) begin
            state <= frame_end ? S_MERGE : S_SCAN;
          end else begin
            ua <= ra_parent;
            ub <= rb_parent;
          end
        end
        S_MERGE: begin
          if (mlabel == '0) begin
            state <= S_DONE;
          end else if (!m_root) begin
            mlabel <= mlabel - LW'(1);
          end else if (out_ready) begin
            mlabel    <= mlabel - LW'(1);
            nclusters <= nclusters + (LW+1)'(1);
          end
        end
        S_DONE: begin
          state      <= S_SCAN;
          next_label <= (LW+1)'(1);
          nclusters  <= '0;
          overflow   <= 1'b0;
          frame_end  <= 1'b0;
        end
        default: state <= S_SCAN;
      endcase
    end
  end

  // ---------------- checks ----------------
  initial begin
    assert (COLS >= 2 && COLS <= MAX_COLS && ROWS >= 1 && ROWS <= MAX_ROWS)
      else $error("cluster_reco: frame size outside 2..%0d x 1..%0d", MAX_COLS, MAX_ROWS);
  end
  // A link always joins two roots, larger label under the smaller one.
  assert property (@(posedge clk) disable iff (!rst_n)
                   link |-> (ra_parent == ua && rb_parent == ub));
  // Label 0 is never a cluster: it is never allocated or written.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (acc_op != ACC_NOP) |-> (acc_dst != '0));
  // A record stays put while the readout stalls.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (out_valid && !out_ready) |=> (out_valid && $stable(out_rec)));

endmodule
