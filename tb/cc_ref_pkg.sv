// cc_ref_pkg: behavioural reference of the Collision Clustering decoder, used
// by the testbenches to work out expected results independently of the RTL.
//
// It keeps clusters as plain union-find sets (with path compression, which
// the RTL does not have) and applies the same rules as the hardware:
//   grow   every defect of an odd cluster that touches no boundary grows by 1;
//   hit    a defect whose radius r exceeds its distance x1 (d - x1) to the
//          logical (other) boundary attaches its cluster to that boundary;
//   merge  defects i, j with r_i + r_j > dist(v_i, v_j) join one cluster;
//   stop   when nothing grows; the correction is the XOR, over clusters, of
//          (odd parity AND touches the logical boundary).
// The distance is computed from coordinates written out here again, not taken
// from the design.
package cc_ref_pkg;

  typedef struct {
    bit correction;
    int num_defects;
    int passes;
    bit overflow;
    int unions;      // successful links
    int bnd_hits;    // boundary attachments
  } ref_result_t;

  function automatic int abs_i(int v);
    return v < 0 ? -v : v;
  endfunction

  function automatic void coords(int d, int vid, output int x1, output int x2, output int t);
    int per_round = (d * d - 1) / 2;
    int in_round  = vid % per_round;
    t  = vid / per_round;
    x2 = in_round / (d - 1);
    x1 = in_round - x2 * (d - 1) + 1;
  endfunction

  function automatic int graph_dist(int d, int va, int vb);
    int ax1, ax2, at, bx1, bx2, bt, s;
    coords(d, va, ax1, ax2, at);
    coords(d, vb, bx1, bx2, bt);
    s = abs_i(ax1 - bx1) + abs_i(ax2 - bx2)
      + abs_i(ax1 - bx1 + at - bt) + abs_i(ax2 - bx2 + at - bt);
    return s / 2;
  endfunction

  function automatic int find(ref int par[], input int x);
    int r = x;
    while (par[r] != r) r = par[r];
    while (par[x] != r) begin
      int nx = par[x];
      par[x] = r;
      x = nx;
    end
    return r;
  endfunction

  // syn[v] = 1 marks a defect at vertex v.
  function automatic ref_result_t decode(int d, int max_def, bit syn[]);
    ref_result_t res;
    int vid[$];
    int r[], par[];
    bit par_odd[], bnd[], lgc[], grew[];
    int n, x1, x2, t;
    bit any;
    res = '{default: 0};
    foreach (syn[v]) begin
      if (syn[v]) begin
        if (vid.size() < max_def) vid.push_back(v);
        else res.overflow = 1;
      end
    end
    n = vid.size();
    res.num_defects = n;
    r = new[n]; par = new[n]; par_odd = new[n]; bnd = new[n]; lgc = new[n]; grew = new[n];
    for (int i = 0; i < n; i++) begin
      r[i] = 0; par[i] = i; par_odd[i] = 1; bnd[i] = 0; lgc[i] = 0;
    end
    forever begin
      bit hit_l[], hit_r[];
      bit corr = 0;
      hit_l = new[n]; hit_r = new[n];
      any = 0;
      res.passes++;
      for (int i = 0; i < n; i++) begin
        int rt = find(par, i);
        grew[i] = par_odd[rt] && !bnd[rt];
        if (rt == i) corr ^= par_odd[i] & lgc[i];
        if (grew[i]) begin
          any = 1;
          coords(d, vid[i], x1, x2, t);
          hit_l[i] = (r[i] + 1 > x1) && (r[i] <= x1);
          hit_r[i] = (r[i] + 1 > d - x1) && (r[i] <= d - x1);
          r[i]++;
        end
      end
      if (!any) begin
        res.correction = corr;
        break;
      end
      for (int i = 0; i < n; i++) begin
        int rt = find(par, i);
        if (hit_l[i]) begin bnd[rt] = 1; lgc[rt] = 1; res.bnd_hits++; end
        if (hit_r[i]) begin bnd[rt] = 1; res.bnd_hits++; end
      end
      for (int i = 0; i < n; i++) begin
        for (int j = i + 1; j < n; j++) begin
          int dd = graph_dist(d, vid[i], vid[j]);
          if (r[i] + r[j] > dd && (r[i] - grew[i]) + (r[j] - grew[j]) <= dd) begin
            int ri = find(par, i);
            int rj = find(par, j);
            if (ri != rj) begin
              par[rj] = ri;
              par_odd[ri] ^= par_odd[rj];
              bnd[ri] |= bnd[rj];
              lgc[ri] |= lgc[rj];
              res.unions++;
            end
          end
        end
      end
    end
    return res;
  endfunction

endpackage
