// cluster_pkg: types and arithmetic shared by the cluster reconstruction blocks.
//
// One electrode (pad) is identified by its column X and row Y, and carries a
// 12-bit ADC charge Q. A cluster record holds the quantities that are kept per
// cluster: sum X*Q, sum Y*Q, sum Q, sum X, sum Y and the bounding box
// Xmin/Xmax/Ymin/Ymax. The field widths are fixed here for frames of up to
// MAX_COLS x MAX_ROWS electrodes, so no sum can overflow for any cluster that
// fits in such a frame.
//
// The list of quantities follows the paper. For a pad readout every electrode
// has a single charge, so the paper's separate "sum Qx" and "sum Qy" are the
// same number and are kept once, as sum_q. The widths and the 0-based
// coordinates are this design's own choices.
package cluster_pkg;

  localparam int unsigned QW       = 12;    // ADC sample width
  localparam int unsigned CW       = 8;     // coordinate width
  localparam int unsigned MAX_COLS = 1 << CW;
  localparam int unsigned MAX_ROWS = 1 << CW;
  // A cluster holds at most MAX_COLS*MAX_ROWS = 2**(2*CW) electrodes.
  localparam int unsigned SUMQ_W   = QW + 2*CW;        // sum of Q
  localparam int unsigned SUMC_W   = CW + 2*CW;        // sum of X or of Y
  localparam int unsigned SUMCQ_W  = CW + QW + 2*CW;   // sum of X*Q or of Y*Q

  typedef logic [QW-1:0] sample_t;
  typedef logic [CW-1:0] coord_t;

  typedef struct packed {
    logic [SUMCQ_W-1:0] sum_xq;
    logic [SUMCQ_W-1:0] sum_yq;
    logic [SUMQ_W-1:0]  sum_q;
    logic [SUMC_W-1:0]  sum_x;
    logic [SUMC_W-1:0]  sum_y;
    coord_t             xmin;
    coord_t             xmax;
    coord_t             ymin;
    coord_t             ymax;
  } cluster_rec_t;

  localparam int unsigned REC_W = $bits(cluster_rec_t);

  // Record of a cluster made of the single electrode (x, y) with charge q.
  function automatic cluster_rec_t pixel_rec(coord_t x, coord_t y, sample_t q);
    cluster_rec_t r;
    r.sum_xq = SUMCQ_W'(x) * SUMCQ_W'(q);
    r.sum_yq = SUMCQ_W'(y) * SUMCQ_W'(q);
    r.sum_q  = SUMQ_W'(q);
    r.sum_x  = SUMC_W'(x);
    r.sum_y  = SUMC_W'(y);
    r.xmin   = x;
    r.xmax   = x;
    r.ymin   = y;
    r.ymax   = y;
    return r;
  endfunction

  // Record of the union of two disjoint clusters.
  function automatic cluster_rec_t merge_rec(cluster_rec_t a, cluster_rec_t b);
    cluster_rec_t r;
    r.sum_xq = a.sum_xq + b.sum_xq;
    r.sum_yq = a.sum_yq + b.sum_yq;
    r.sum_q  = a.sum_q  + b.sum_q;
    r.sum_x  = a.sum_x  + b.sum_x;
    r.sum_y  = a.sum_y  + b.sum_y;
    r.xmin   = (a.xmin < b.xmin) ? a.xmin : b.xmin;
    r.xmax   = (a.xmax > b.xmax) ? a.xmax : b.xmax;
    r.ymin   = (a.ymin < b.ymin) ? a.ymin : b.ymin;
    r.ymax   = (a.ymax > b.ymax) ? a.ymax : b.ymax;
    return r;
  endfunction

  // Operations of the per-label accumulator table.
  typedef enum logic [1:0] {
    ACC_NOP   = 2'd0,  // no write
    ACC_INIT  = 2'd1,  // start a new cluster with one electrode
    ACC_ADD   = 2'd2,  // add one electrode to a cluster
    ACC_MERGE = 2'd3   // fold another label's record into a cluster
  } acc_op_e;

endpackage
