// h2eal_ref_pkg: reference model of one head's hybrid sparse attention, for
// the testbenches. It keeps token lists instead of memory images and works
// out, independently of the RTL, which tokens a decode step attends to
// (sink tokens, the window, the local pages of a streaming head, or the
// top-k pages of a retrieval head with importance-based eviction and shared
// selections) and the softmax result in floating point.
package h2eal_ref_pkg;

  class head_ref;
    int D, PAGE, N_SINK, WIN, LOCP, NPAGES, K, SELI;
    bit is_ret;
    int kk[$][], vv[$][];           // all tokens seen
    int sink[$];                    // token ids
    int win[$];
    int ring[$][$];                 // streaming: local pages, oldest first
    int pg_tok[][$];                // retrieval: tokens of each page slot
    int pg_min[][], pg_max[][];
    longint imp[];
    int n_pages;
    bit sel_valid;
    int sel_age;
    int sel[$];
    int n_evict, n_select, n_reuse, n_pop;

    function new(int D, int PAGE, int N_SINK, int WIN, int LOCP, int NPAGES,
                 int K, int SELI, bit is_ret);
      this.D = D; this.PAGE = PAGE; this.N_SINK = N_SINK; this.WIN = WIN;
      this.LOCP = LOCP; this.NPAGES = NPAGES; this.K = K; this.SELI = SELI;
      this.is_ret = is_ret;
      pg_tok = new[NPAGES]; pg_min = new[NPAGES]; pg_max = new[NPAGES];
      imp = new[NPAGES];
      n_pages = 0; sel_valid = 0; sel_age = 0;
      n_evict = 0; n_select = 0; n_reuse = 0; n_pop = 0;
    endfunction

    function int dot(int a[], int b[]);
      int s = 0;
      for (int i = 0; i < D; i++) s += a[i] * b[i];
      return s;
    endfunction

    function void append(int k[], int v[]);
      int id = kk.size();
      kk.push_back(k);
      vv.push_back(v);
      if (sink.size() < N_SINK) begin
        sink.push_back(id);
        return;
      end
      win.push_back(id);
      if (win.size() == WIN) pop_page();
    endfunction

    function void pop_page();
      int pg[$];
      for (int i = 0; i < PAGE; i++) pg.push_back(win.pop_front());
      n_pop++;
      if (!is_ret) begin
        ring.push_back(pg);
        if (ring.size() > LOCP) void'(ring.pop_front());
      end else begin
        int slot;
        if (n_pages < NPAGES) begin
          slot = n_pages;
        end else begin
          slot = 0;
          for (int p = 1; p < n_pages; p++) if (imp[p] < imp[slot]) slot = p;
          sel_valid = 0;
          n_evict++;
        end
        pg_tok[slot] = pg;
        pg_min[slot] = new[D];
        pg_max[slot] = new[D];
        for (int i = 0; i < D; i++) begin
          pg_min[slot][i] = 127;
          pg_max[slot][i] = -128;
          foreach (pg[t]) begin
            if (kk[pg[t]][i] < pg_min[slot][i]) pg_min[slot][i] = kk[pg[t]][i];
            if (kk[pg[t]][i] > pg_max[slot][i]) pg_max[slot][i] = kk[pg[t]][i];
          end
        end
        imp[slot] = 0;
        if (slot == n_pages) n_pages++;
      end
    endfunction

    // tokens attended by a decode step with query q (the token itself has
    // already been appended)
    function void attended(int q[], ref int ids[$]);
      ids.delete();
      foreach (sink[i]) ids.push_back(sink[i]);
      foreach (win[i])  ids.push_back(win[i]);
      if (!is_ret) begin
        foreach (ring[r]) foreach (ring[r][j]) ids.push_back(ring[r][j]);
        return;
      end
      if (!sel_valid || sel_age == SELI - 1) begin
        int sc[$], order[$];
        sel.delete();
        for (int p = 0; p < n_pages; p++) begin
          int a = dot(q, pg_min[p]), b = dot(q, pg_max[p]);
          int s = (a > b) ? a : b;
          int pos = order.size();
          imp[p] += s;
          if (imp[p] > 64'sh7fffffff)  imp[p] = 64'sh7fffffff;
          if (imp[p] < -64'sh80000000) imp[p] = -64'sh80000000;
          // stable descending insertion
          for (int j = 0; j < order.size(); j++)
            if (s > sc[j]) begin pos = j; break; end
          sc.insert(pos, s);
          order.insert(pos, p);
        end
        for (int j = 0; j < order.size() && j < K; j++) sel.push_back(order[j]);
        sel_valid = 1;
        sel_age = 0;
        n_select++;
      end else begin
        sel_age++;
        n_reuse++;
      end
      foreach (sel[j]) foreach (pg_tok[sel[j]][t]) ids.push_back(pg_tok[sel[j]][t]);
    endfunction

    // floating-point softmax attention over ids (base-2 logits as the RTL
    // scales them), result truncated toward zero like the RTL's divider
    function void attend(int q[], int ids[$], ref int out[]);
      real x[$], m, l, o;
      out = new[D];
      m = -1.0e30;
      foreach (ids[i]) begin
        x.push_back($itor(dot(q, kk[ids[i]])) * 33.0 / 256.0);
        if (x[i] > m) m = x[i];
      end
      for (int d = 0; d < D; d++) begin
        l = 0; o = 0;
        foreach (ids[i]) begin
          real w = 2.0 ** (x[i] - m);
          l += w;
          o += w * vv[ids[i]][d];
        end
        out[d] = (l == 0) ? 0 : int'($rtoi(o / l));
      end
    endfunction
  endclass

endpackage
