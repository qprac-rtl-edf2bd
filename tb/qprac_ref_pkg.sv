// qprac_ref_pkg -- transaction-level reference model of QPRAC for testbenches.
//
// qprac_bank_ref models one bank: PRAC counters (saturating at 127) and the
// PSQ as an ordered list. The list is kept sorted by count, descending, with
// a stable insertion sort, so that among equal counts the older position
// wins; this pins down which of several equal entries is evicted or popped.
// A mitigation pops the head and clears its counter; then each victim
// row-BR..row-1, row+1..row+BR inside the bank has its counter incremented
// and is offered to the PSQ, one victim per call, so that a testbench can
// follow the RTL cycle by cycle.
package qprac_ref_pkg;

  class qprac_bank_ref;
    int rows, n, n_bo, n_pro, br;
    bit proactive_en;
    int cnt [int];
    int q_row [$];
    int q_cnt [$];
    // event counters
    int n_insert, n_evict, n_hit, n_reject, n_victim_insert;

    function new(int rows, int n, int n_bo, int n_pro, int br, bit proactive_en);
      this.rows = rows; this.n = n; this.n_bo = n_bo; this.n_pro = n_pro;
      this.br = br; this.proactive_en = proactive_en;
    endfunction

    function int get_cnt(int r);
      return cnt.exists(r) ? cnt[r] : 0;
    endfunction

    // stable insertion sort, descending by count
    function void sort_q();
      for (int i = 1; i < q_row.size(); i++) begin
        int j = i;
        while (j > 0 && q_cnt[j] > q_cnt[j-1]) begin
          int tr = q_row[j], tc = q_cnt[j];
          q_row[j] = q_row[j-1]; q_cnt[j] = q_cnt[j-1];
          q_row[j-1] = tr; q_cnt[j-1] = tc;
          j--;
        end
      end
    endfunction

    // Offer row r with count c to the PSQ; returns 1 if r is now held.
    function bit psq_update(int r, int c);
      foreach (q_row[i]) if (q_row[i] == r) begin
        q_cnt[i] = c; n_hit++; sort_q(); return 1;
      end
      if (q_row.size() < n) begin
        q_row.push_back(r); q_cnt.push_back(c); n_insert++; sort_q(); return 1;
      end
      if (c > q_cnt[n-1]) begin
        q_row[n-1] = r; q_cnt[n-1] = c; n_insert++; n_evict++; sort_q(); return 1;
      end
      n_reject++;
      return 0;
    endfunction

    function void act(int r);
      int c = get_cnt(r);
      if (c < 127) c++;
      cnt[r] = c;
      void'(psq_update(r, c));
    endfunction

    function bit alert_req();
      return q_row.size() > 0 && q_cnt[0] >= n_bo;
    endfunction

    // Starts a mitigation: returns 1 if one happens, pops the aggressor and
    // clears its counter, and lists the victims in the order the RTL visits
    // them (-1 for a victim outside the bank, which is skipped). The caller
    // applies each victim with victim(), one per cycle.
    function bit mitigate(bit is_rfm, output int aggr, output int aggr_cnt,
                          output int victims [$]);
      victims = {};
      aggr = -1; aggr_cnt = 0;
      if (q_row.size() == 0) return 0;
      if (!is_rfm && (!proactive_en || q_cnt[0] < n_pro)) return 0;
      aggr = q_row.pop_front();
      aggr_cnt = q_cnt.pop_front();
      cnt[aggr] = 0;
      for (int k = -br; k <= br; k++) begin
        int v;
        v = aggr + k;
        if (k == 0) continue;
        victims.push_back((v < 0 || v >= rows) ? -1 : v);
      end
      return 1;
    endfunction

    // Victim refresh of row v: its counter counts it, the PSQ is offered it.
    function void victim(int v);
      int c;
      if (v < 0) return;
      c = get_cnt(v);
      if (c < 127) c++;
      cnt[v] = c;
      if (psq_update(v, c)) n_victim_insert++;
    endfunction
  endclass

endpackage
