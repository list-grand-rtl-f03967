// lgrand_ref_pkg: behavioural reference of List-GRAND decoding for testbenches.
//
// Works on plain integers, independent of the RTL's schedule: it sorts the
// channel magnitudes (ties by channel index), then scans logistic weights
// m = 1, 2, ... and, for each, every set of distinct parts summing to m (all
// parts <= n, at most hw parts), testing H * (yhat ^ e) = 0. The first
// logistic weight i with a codeword fixes Delta = the smallest Hamming weight
// of a codeword TEP at that weight and Lambda = min(i + delta, lw_max). The
// list is every codeword TEP with i <= LW <= Lambda and HW <= Delta, and the
// result is the largest metric sum_i (-1)^{c_i} y_i over the list.
package lgrand_ref_pkg;

  class lgrand_ref;
    int n;
    bit [63:0] col [];      // column i of H (channel order)
    int        yv  [];      // signed channel values
    bit        yh  [];      // hard decisions
    int        ord [];      // channel index at sorted position j
    bit [63:0] scol [];     // columns in sorted order
    int        amag [];     // |y| in sorted order
    bit [63:0] sc;
    int        msum;        // sum |y|

    // results
    bit success;
    bit zero_syndrome;
    int first_lw, delta_hw, lambda;
    int list_count;
    int best_metric;
    int last_hw_min;        // scratch of scan()
    int scan_count, scan_best;

    function new(int n_);
      n = n_;
      col = new[n]; yv = new[n]; yh = new[n]; ord = new[n]; scol = new[n]; amag = new[n];
    endfunction

    function void prepare();
      msum = 0;
      sc = '0;
      for (int i = 0; i < n; i++) begin
        yh[i] = (yv[i] < 0);
        msum += (yv[i] < 0) ? -yv[i] : yv[i];
        if (yh[i]) sc ^= col[i];
        ord[i] = i;
      end
      // insertion sort by (|y|, index)
      for (int i = 1; i < n; i++) begin
        int t, j;
        t = ord[i];
        j = i - 1;
        while (j >= 0 && key(ord[j]) > key(t)) begin ord[j+1] = ord[j]; j--; end
        ord[j+1] = t;
      end
      for (int j = 0; j < n; j++) begin
        scol[j] = col[ord[j]];
        amag[j] = (yv[ord[j]] < 0) ? -yv[ord[j]] : yv[ord[j]];
      end
    endfunction

    function int key(int i);
      int a;
      a = (yv[i] < 0) ? -yv[i] : yv[i];
      return a * 1024 + i;
    endfunction

    // All sets of distinct parts (each <= n) with sum m and at most hw parts.
    // Sets scan_count / scan_best (codeword TEPs and their best metric) and
    // last_hw_min (smallest HW of a codeword TEP, 0 if none).
    function void scan(int m, int hw);
      int pf [16];
      scan_count = 0; scan_best = -(1 << 30); last_hw_min = 0;
      for (int p = 1; p <= hw && p <= 16; p++) begin
        int j;
        bit more;
        // first p-1 parts: 1, 2, ..., p-1
        for (int i = 0; i < p - 1; i++) pf[i] = i + 1;
        more = 1;
        if (p * (p + 1) / 2 > m) more = 0;
        while (more) begin
          int s, last, top;
          bit [63:0] syn;
          s = 0; syn = sc;
          for (int i = 0; i < p - 1; i++) begin s += pf[i]; syn ^= scol[pf[i]-1]; end
          top  = (p > 1) ? pf[p-2] : 0;
          last = m - s;
          if (last > top && last <= n) begin
            syn ^= scol[last-1];
            if (syn == '0) begin
              int met;
              met = msum - 2 * amag[last-1];
              for (int i = 0; i < p - 1; i++) met -= 2 * amag[pf[i]-1];
              scan_count++;
              if (met > scan_best) scan_best = met;
              if (last_hw_min == 0 || p < last_hw_min) last_hw_min = p;
            end
          end
          // advance the first p-1 parts (lexicographic), keeping the
          // smallest completion feasible: sum + (top + 1) <= m
          j = p - 2;
          more = 0;
          while (j >= 0 && !more) begin
            int ss;
            pf[j]++;
            for (int i = j + 1; i < p - 1; i++) pf[i] = pf[i-1] + 1;
            ss = 0;
            for (int i = 0; i < p - 1; i++) ss += pf[i];
            if (ss + pf[p-2] + 1 <= m) more = 1;
            else j--;
          end
        end
      end
    endfunction

    function void decode(int lw_max, int hw_max, int delta);
      prepare();
      zero_syndrome = (sc == '0);
      success = zero_syndrome;
      list_count = 0; best_metric = msum; first_lw = 0; delta_hw = hw_max; lambda = lw_max;
      if (zero_syndrome) return;
      for (int m = 1; m <= lw_max; m++) begin
        scan(m, hw_max);
        if (scan_count > 0) begin
          first_lw = m;
          delta_hw = last_hw_min;
          lambda   = (m + delta < lw_max) ? m + delta : lw_max;
          break;
        end
      end
      if (first_lw == 0) return;
      success = 1;
      best_metric = -(1 << 30);
      for (int m = first_lw; m <= lambda; m++) begin
        scan(m, delta_hw);
        list_count += scan_count;
        if (scan_count > 0 && scan_best > best_metric) best_metric = scan_best;
      end
    endfunction

    // metric of an arbitrary word (channel order)
    function int metric_of(bit c []);
      int s = 0;
      for (int i = 0; i < n; i++) s += (c[i] ^ yh[i]) ? -((yv[i] < 0) ? -yv[i] : yv[i])
                                                      :  ((yv[i] < 0) ? -yv[i] : yv[i]);
      return s;
    endfunction

    function bit is_codeword(bit c []);
      bit [63:0] s = '0;
      for (int i = 0; i < n; i++) if (c[i]) s ^= col[i];
      return s == '0;
    endfunction
  endclass

endpackage
