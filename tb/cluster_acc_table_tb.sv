// cluster_acc_table_tb: random INIT / ADD / MERGE operations on a small
// table, checked against a model that keeps each label's quantities as
// 64-bit integers computed directly from the electrodes.
module cluster_acc_table_tb;
  import cluster_pkg::*;
  localparam int N = 16, LW = 4;

  typedef struct {
    longint unsigned sxq, syq, sq, sx, sy;
    int xmin, xmax, ymin, ymax;
  } mrec_t;

  logic clk = 0;
  acc_op_e op = ACC_NOP;
  logic [LW-1:0] dst = '0, src = '0;
  coord_t px = '0, py = '0;
  sample_t pq = '0;
  cluster_rec_t src_rec;
  int checks = 0, failures = 0;
  mrec_t m[N];
  bit valid[N];

  cluster_acc_table #(.NLABELS(N), .LW(LW)) dut (.*);

  always #5 clk = ~clk;

  function automatic bit same(cluster_rec_t r, mrec_t e);
    return r.sum_xq == SUMCQ_W'(e.sxq) && r.sum_yq == SUMCQ_W'(e.syq) &&
           r.sum_q == SUMQ_W'(e.sq) && r.sum_x == SUMC_W'(e.sx) &&
           r.sum_y == SUMC_W'(e.sy) && r.xmin == CW'(e.xmin) &&
           r.xmax == CW'(e.xmax) && r.ymin == CW'(e.ymin) && r.ymax == CW'(e.ymax);
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int step = 0; step < 3000; step++) begin
      automatic int d = $urandom_range(1, N - 1);
      automatic int s = $urandom_range(1, N - 1);
      automatic int x = $urandom_range(255), y = $urandom_range(255), q = $urandom_range(4095);
      @(negedge clk);
      px = CW'(x); py = CW'(y); pq = QW'(q);
      dst = LW'(d); src = LW'(s);
      if (!valid[d] || $urandom_range(9) == 0) begin
        op = ACC_INIT;
        m[d] = '{sxq: longint'(x)*q, syq: longint'(y)*q, sq: q, sx: x, sy: y,
                 xmin: x, xmax: x, ymin: y, ymax: y};
        valid[d] = 1;
      end else if (valid[s] && s != d && $urandom_range(3) == 0) begin
        op = ACC_MERGE;
        m[d].sxq += m[s].sxq; m[d].syq += m[s].syq; m[d].sq += m[s].sq;
        m[d].sx += m[s].sx; m[d].sy += m[s].sy;
        if (m[s].xmin < m[d].xmin) m[d].xmin = m[s].xmin;
        if (m[s].xmax > m[d].xmax) m[d].xmax = m[s].xmax;
        if (m[s].ymin < m[d].ymin) m[d].ymin = m[s].ymin;
        if (m[s].ymax > m[d].ymax) m[d].ymax = m[s].ymax;
      end else begin
        op = ACC_ADD;
        m[d].sxq += longint'(x)*q; m[d].syq += longint'(y)*q; m[d].sq += q;
        m[d].sx += x; m[d].sy += y;
        if (x < m[d].xmin) m[d].xmin = x;
        if (x > m[d].xmax) m[d].xmax = x;
        if (y < m[d].ymin) m[d].ymin = y;
        if (y > m[d].ymax) m[d].ymax = y;
      end
      @(posedge clk);
      #1;
      op  = ACC_NOP;
      src = LW'(d);
      #1;
      checks++;
      if (!same(src_rec, m[d])) begin
        failures++;
        $display("FAIL step %0d op %s label %0d: sum_q %0d expected %0d, sum_xq %0d expected %0d",
                 step, op.name(), d, src_rec.sum_q, m[d].sq, src_rec.sum_xq, m[d].sxq);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
