// tb_ref_pkg -- software reference of the point-mapping algorithms and of
// the MLP arithmetic, used by the testbenches to compute expected results
// independently of the RTL.
//   fps      farthest point sampling seeded by the first candidate; the next
//            centre is the first candidate with the largest distance to the
//            chosen set;
//   knn      the k nearest candidates, nearest first, ties to the earlier;
//   order    greedy nearest-next ordering from the first centre, or
//            ascending index when reordering is off;
//   schedule receptive-field-by-receptive-field execution order;
//   mlp      Q8.8 arithmetic: sat16(sum x*w >>> 8), ReLU.
package tb_ref_pkg;
  typedef int ilist[$];

  function automatic longint sqdist(int ax, int ay, int az, int bx, int by, int bz);
    return longint'(ax - bx) ** 2 + longint'(ay - by) ** 2 + longint'(az - bz) ** 2;
  endfunction

  class cloud;
    int x[], y[], z[];
    function new(int n, int range_);
      x = new[n]; y = new[n]; z = new[n];
      for (int i = 0; i < n; i++) begin
        x[i] = int'($urandom % range_) - range_ / 2;
        y[i] = int'($urandom % range_) - range_ / 2;
        z[i] = int'($urandom % range_) - range_ / 2;
      end
    endfunction
    function longint d(int a, int b);
      return sqdist(x[a], y[a], z[a], x[b], y[b], z[b]);
    endfunction
    function ilist fps(ilist cand, int m);
      longint mind[];
      ilist c;
      int last;
      mind = new[cand.size()];
      c.push_back(cand[0]);
      last = cand[0];
      for (int s = 1; s < m; s++) begin
        longint best;
        int bi;
        best = 0; bi = last;
        foreach (cand[p]) begin
          longint dd;
          dd = d(cand[p], last);
          if (s == 1 || dd < mind[p]) mind[p] = dd;
          if (mind[p] > best) begin best = mind[p]; bi = cand[p]; end
        end
        c.push_back(bi);
        last = bi;
      end
      return c;
    endfunction
    function ilist knn(ilist cand, int centre, int k);
      ilist r;
      longint rd[$];
      foreach (cand[p]) begin
        longint dd;
        int at;
        dd = d(cand[p], centre);
        at = 0;
        while (at < rd.size() && rd[at] <= dd) at++;
        rd.insert(at, dd);
        r.insert(at, cand[p]);
      end
      return r[0:k-1];
    endfunction
    function ilist order(ilist cen, bit reorder);
      bit used[];
      ilist o;
      int last;
      used = new[cen.size()];
      for (int s = 0; s < cen.size(); s++) begin
        int bp;
        longint bk;
        bp = -1; bk = 0;
        foreach (cen[p]) if (!used[p]) begin
          longint key;
          key = !reorder ? longint'(cen[p]) : (s == 0 ? longint'(p) : d(cen[p], last));
          if (bp < 0 || key < bk) begin bp = p; bk = key; end
        end
        used[bp] = 1;
        o.push_back(cen[bp]);
        last = cen[bp];
      end
      return o;
    endfunction
  endclass

  function automatic int sat16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction
endpackage
