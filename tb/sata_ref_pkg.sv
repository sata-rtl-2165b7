// sata_ref_pkg: behavioural reference of the SATA sorting and classification,
// used by the testbenches to compute expected results independently of the RTL.
//
// It follows the algorithm literally rather than the hardware's shortcut: a
// dummy vector holds, per query, how many sorted keys it attends; the next key
// is the unsorted one with the largest dot(dummy, column), lowest index on a
// tie. Classification recomputes key ranks and tags every query for each S_h,
// lowering S_h while more than theta queries are GLOB.
package sata_ref_pkg;

  localparam int MAXN = 32;
  typedef bit [MAXN-1:0] rowv_t;

  typedef struct {
    int order [MAXN];     // sorted key indices, rank 0 first
    int rank  [MAXN];
    int qt    [MAXN];     // 0 HEAD, 1 TAIL, 2 GLOB
    int s_h;
    int ht;               // 0 HEAD, 1 TAIL, 2 GLOB
    int concedes;
    int n_head, n_tail, n_glob;
  } ref_t;

  function automatic bit mbit(rowv_t m [MAXN], int q, int k);
    return m[q][k];
  endfunction

  function automatic ref_t run(rowv_t m [MAXN], int n, int seed, int theta);
    ref_t r;
    int   dummy [MAXN];
    bit   done  [MAXN];
    int   best, bestv, sc;
    for (int q = 0; q < MAXN; q++) begin dummy[q] = 0; done[q] = 0; end
    // sort
    r.order[0] = seed; done[seed] = 1;
    for (int q = 0; q < n; q++) dummy[q] += m[q][seed];
    for (int s = 1; s < n; s++) begin
      best = -1; bestv = -1;
      for (int k = 0; k < n; k++) begin
        if (done[k]) continue;
        sc = 0;
        for (int q = 0; q < n; q++) sc += dummy[q] * m[q][k];
        if (sc > bestv) begin bestv = sc; best = k; end
      end
      r.order[s] = best; done[best] = 1;
      for (int q = 0; q < n; q++) dummy[q] += m[q][best];
    end
    for (int s = 0; s < n; s++) r.rank[r.order[s]] = s;
    // classify
    r.s_h = n / 2; r.concedes = 0;
    forever begin
      bit hit_first, hit_last;
      r.n_head = 0; r.n_tail = 0; r.n_glob = 0;
      for (int q = 0; q < n; q++) begin
        hit_first = 0; hit_last = 0;
        for (int k = 0; k < n; k++) if (m[q][k]) begin
          if (r.rank[k] < r.s_h)      hit_first = 1;
          if (r.rank[k] >= n - r.s_h) hit_last  = 1;
        end
        if (!hit_last)       begin r.qt[q] = 0; r.n_head++; end
        else if (!hit_first) begin r.qt[q] = 1; r.n_tail++; end
        else                 begin r.qt[q] = 2; r.n_glob++; end
      end
      if (r.n_glob > theta) begin r.s_h--; r.concedes++; end
      else break;
    end
    if (r.s_h == 0)                r.ht = 2;
    else if (r.n_head >= r.n_tail) r.ht = 0;
    else                           r.ht = 1;
    return r;
  endfunction

endpackage
