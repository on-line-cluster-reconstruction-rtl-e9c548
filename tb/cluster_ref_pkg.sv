// cluster_ref_pkg: reference model used by the testbenches.
//
// ref_clusters() finds the clusters of a frame the straightforward way: every
// fired electrode (sample > threshold) not yet visited starts a flood fill
// over its 8 neighbours, and the cluster quantities are summed in 64-bit
// integers. It shares nothing with the RTL's labelling or arithmetic, so it
// checks the design independently. count_matches() compares an observed list
// of records with the expected one as unordered sets.
package cluster_ref_pkg;
  import cluster_pkg::*;

  function automatic void ref_clusters(input int cols, input int rows,
                                       ref int unsigned q[],
                                       input int unsigned thr,
                                       ref cluster_rec_t out[$]);
    bit seen[];
    int stack[$];
    seen = new[cols*rows];
    out.delete();
    for (int i = 0; i < cols*rows; i++) begin
      if (q[i] > thr && !seen[i]) begin
        longint unsigned sxq = 0, syq = 0, sq = 0, sx = 0, sy = 0;
        int xmin = cols, xmax = -1, ymin = rows, ymax = -1;
        cluster_rec_t r;
        stack.push_back(i);
        seen[i] = 1;
        while (stack.size() > 0) begin
          int k = stack.pop_back();
          int x = k % cols;
          int y = k / cols;
          sxq += longint'(x) * q[k];
          syq += longint'(y) * q[k];
          sq  += q[k];
          sx  += x;
          sy  += y;
          if (x < xmin) xmin = x;
          if (x > xmax) xmax = x;
          if (y < ymin) ymin = y;
          if (y > ymax) ymax = y;
          for (int dy = -1; dy <= 1; dy++)
            for (int dx = -1; dx <= 1; dx++) begin
              int nx = x + dx;
              int ny = y + dy;
              if (nx >= 0 && nx < cols && ny >= 0 && ny < rows) begin
                int n = ny*cols + nx;
                if (q[n] > thr && !seen[n]) begin
                  seen[n] = 1;
                  stack.push_back(n);
                end
              end
            end
        end
        r.sum_xq = SUMCQ_W'(sxq);
        r.sum_yq = SUMCQ_W'(syq);
        r.sum_q  = SUMQ_W'(sq);
        r.sum_x  = SUMC_W'(sx);
        r.sum_y  = SUMC_W'(sy);
        r.xmin   = CW'(xmin);
        r.xmax   = CW'(xmax);
        r.ymin   = CW'(ymin);
        r.ymax   = CW'(ymax);
        out.push_back(r);
      end
    end
  endfunction

  // Number of observed records that match a distinct expected record.
  function automatic int count_matches(ref cluster_rec_t got[$],
                                       ref cluster_rec_t exp[$]);
    bit used[];
    int n = 0;
    used = new[exp.size()];
    foreach (got[g]) begin
      for (int e = 0; e < exp.size(); e++) begin
        if (!used[e] && got[g] == exp[e]) begin
          used[e] = 1;
          n++;
          break;
        end
      end
    end
    return n;
  endfunction

endpackage
