// equiv_table: record of which provisional clusters are the same cluster.
//
// Every label L has a parent pointer; L is the representative (root) of its
// cluster when parent[L] == L. A new label is entered as its own root. When
// the reconstruction finds that two clusters touch, it walks both labels up
// to their roots and links them: the larger root is pointed at the smaller.
// So parent[L] <= L always holds, which lets the end-of-frame pass fold the
// clusters together with a single sweep from the highest label down
// (see cluster_reco). The paper says only that the module "will mark this two
// clusters"; the parent-pointer form is this design's choice.
//
// Interface: two combinational read ports (ra/rb). One write per cycle:
// alloc sets parent[alloc_label] = alloc_label; link (with two roots a != b)
// sets parent[max(a,b)] = min(a,b). alloc has priority; the controller never
// asks for both in one cycle.
module equiv_table #(
  parameter int unsigned NLABELS = 8192,
  parameter int unsigned LW      = $clog2(NLABELS)
) (
  input  logic          clk,
  input  logic [LW-1:0] ra_label,
  output logic [LW-1:0] ra_parent,
  input  logic [LW-1:0] rb_label,
  output logic [LW-1:0] rb_parent,
  input  logic          alloc,
  input  logic [LW-1:0] alloc_label,
  input  logic          link,
  input  logic [LW-1:0] link_a,
  input  logic [LW-1:0] link_b
);

  logic [LW-1:0] parent [NLABELS];

  assign ra_parent = parent[ra_label];
  assign rb_parent = parent[rb_label];

  logic [LW-1:0] lo, hi;
  assign lo = (link_a < link_b) ? link_a : link_b;
  assign hi = (link_a < link_b) ? link_b : link_a;

  always_ff @(posedge clk) begin
    if (alloc)     parent[alloc_label] <= alloc_label;
    else if (link) parent[hi] <= lo;
  end

endmodule
