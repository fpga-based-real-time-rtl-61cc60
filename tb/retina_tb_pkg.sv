// retina_tb_pkg: reference functions shared by the node-level testbenches,
// written independently of the RTL: the Gaussian weight of a hit (real
// exp()), and the local-maximum search with 3x3 centroid over a grid of
// responses.
package retina_tb_pkg;
  import retina_pkg::*;

  function automatic int ref_weight(int dx, int dy, int sigma2);
    if (dx <= -16 || dx >= 16 || dy <= -16 || dy >= 16) return 0;
    return int'($floor(255.0 * $exp(-real'(dx*dx + dy*dy) / (2.0 * sigma2)) + 0.5));
  endfunction

  typedef track_t track_q_t [$];

  // tracks, in raster order, of a gu x gv grid of responses r[v*gu + u]
  function automatic track_q_t ref_tracks(int r [], int gu, int gv, int thresh);
    track_q_t q;
    for (int c = 0; c < gu * gv; c++) begin
      bit m;
      int cu, cv, s, nu, nv;
      cu = c % gu; cv = c / gu;
      m = r[c] > thresh;
      s = 0; nu = 0; nv = 0;
      for (int dv = -1; dv <= 1; dv++) for (int du = -1; du <= 1; du++) begin
        int u, v, n;
        u = cu + du; v = cv + dv; n = v * gu + u;
        if (u >= 0 && u < gu && v >= 0 && v < gv) begin
          if (n < c && !(r[c] > r[n])) m = 0;
          if (n > c && r[c] < r[n]) m = 0;
          s += r[n]; nu += du * r[n]; nv += dv * r[n];
        end
      end
      if (m) begin
        track_t t;
        int qu, qv;
        qu = (nu < 0 ? -nu : nu) * 64 / s; if (qu > 127) qu = 127; if (nu < 0) qu = -qu;
        qv = (nv < 0 ? -nv : nv) * 64 / s; if (qv > 127) qv = 127; if (nv < 0) qv = -qv;
        t.cell_u = 8'(cu); t.cell_v = 8'(cv);
        t.du = 8'(qu); t.dv = 8'(qv);
        t.peak = 16'(r[c]);
        q.push_back(t);
      end
    end
    return q;
  endfunction
endpackage
