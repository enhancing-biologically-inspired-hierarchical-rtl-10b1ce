// Reference model of the accelerated HTM top for the end-to-end testbenches.
//
// rm_ref mirrors the reflex-memory algorithm at the level of entries: pair
// counts saturating at 2^Q-1, the most frequent successor with the lowest
// entry on ties, the lowest free entry for new data, the present state of an
// unseen SDR written first and completed by the next SDR, drop when full,
// host eviction of a (R_i, R_i+1) pair. cu_ref mirrors the control unit:
// anomaly score ARS = 1 - overlap / nz(actual) with 8 fractional bits, the
// 50 % correctness rule and the sum of the last WIN scores.
package ahtm_ref_pkg;

  class rm_ref #(int W = 32, int E = 16, int Q = 8);
    bit         v [E];
    bit [W-1:0] pres [E], nxt [E];
    int         cnt [E], ts [E];
    bit         pend_v, prev_v, lp_v;
    int         pend_row, lp_row, now;
    bit [W-1:0] prev;
    // results of the last step
    bit         hit, is_new, mm, drop, decd;
    bit [W-1:0] pred;

    function new();
      for (int e = 0; e < E; e++) begin v[e] = 0; pres[e] = '0; nxt[e] = '0; cnt[e] = 0; ts[e] = 0; end
      pend_v = 0; prev_v = 0; lp_v = 0; pend_row = 0; lp_row = 0; now = 0; prev = '0;
    endfunction

    function int free_row();
      for (int e = 0; e < E; e++) if (!v[e] && !(pend_v && pend_row == e)) return e;
      return -1;
    endfunction

    function bit full();
      return free_row() < 0;
    endfunction

    function void restart();
      prev_v = 0; pend_v = 0; lp_v = 0;
    endfunction

    function void step(bit [W-1:0] x, bit dec);
      int row, f, nc;
      bit [E-1:0] c;
      hit = 0; is_new = 0; mm = 0; drop = 0; decd = 0; pred = '0;
      if (dec && lp_v) begin
        if (cnt[lp_row] > 0) cnt[lp_row]--;
        decd = 1;
      end
      if (prev_v) begin
        row = -1;
        for (int e = E - 1; e >= 0; e--) if (v[e] && pres[e] == prev && nxt[e] == x) row = e;
        if (row >= 0) begin
          if (cnt[row] < (1 << Q) - 1) cnt[row]++;
          ts[row] = now;
        end else if (pend_v) begin
          nxt[pend_row] = x; cnt[pend_row] = 1; v[pend_row] = 1; ts[pend_row] = now;
          pend_v = 0; is_new = 1;
        end else begin
          f = free_row();
          if (f >= 0) begin
            pres[f] = prev; nxt[f] = x; cnt[f] = 1; v[f] = 1; ts[f] = now; is_new = 1;
          end else drop = 1;
        end
      end
      c = '0; nc = 0;
      for (int e = 0; e < E; e++) if (v[e] && pres[e] == x) begin c[e] = 1; nc++; end
      if (nc == 0) begin
        f = free_row();
        if (f >= 0) begin pres[f] = x; pend_v = 1; pend_row = f; ts[f] = now; end
        else drop = 1;
      end else begin
        int best;
        mm = (nc > 1);
        best = -1; row = -1;
        for (int e = 0; e < E; e++) if (c[e] && cnt[e] > best) begin best = cnt[e]; row = e; end
        hit = 1; pred = nxt[row]; ts[row] = now; lp_v = 1; lp_row = row;
      end
      if (!hit) lp_v = 0;
      prev = x; prev_v = 1; now++;
    endfunction

    // Entry the host would replace: lowest count, then oldest time stamp.
    function int victim();
      int best;
      best = -1;
      for (int e = 0; e < E; e++)
        if (v[e] && (best < 0 || cnt[e] < cnt[best] || (cnt[e] == cnt[best] && ts[e] < ts[best])))
          best = e;
      return best;
    endfunction

    function void evict(int e);
      v[e] = 0; cnt[e] = 0; pres[e] = '0; nxt[e] = '0;
      if (lp_v && lp_row == e) lp_v = 0;
    endfunction
  endclass

  class cu_ref #(int W = 32, int WIN = 4);
    int rm_w [WIN], sm_w [WIN];
    bit use_sm, rm_ok, sm_ok;

    function new();
      for (int i = 0; i < WIN; i++) begin rm_w[i] = 0; sm_w[i] = 0; end
      use_sm = 0;
    endfunction

    static function int score(bit [W-1:0] p, bit pv, bit [W-1:0] a, output bit ok);
      int na, ov;
      na = 0; ov = 0;
      for (int i = 0; i < W; i++) begin na += a[i]; ov += a[i] & p[i]; end
      if (!pv) begin ok = 0; return 256; end
      ok = (2 * ov >= na);
      return (na == 0) ? 0 : ((na - ov) * 256) / na;
    endfunction

    function void step(bit [W-1:0] a, bit [W-1:0] rp, bit rv, bit [W-1:0] sp, bit sv);
      int rs, ss;
      for (int i = WIN - 1; i > 0; i--) begin rm_w[i] = rm_w[i-1]; sm_w[i] = sm_w[i-1]; end
      rm_w[0] = score(rp, rv, a, rm_ok);
      sm_w[0] = score(sp, sv, a, sm_ok);
      rs = 0; ss = 0;
      for (int i = 0; i < WIN; i++) begin rs += rm_w[i]; ss += sm_w[i]; end
      use_sm = (rs > ss);
    endfunction
  endclass

endpackage
