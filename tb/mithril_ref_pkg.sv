// mithril_ref_pkg: untimed reference model of one bank's Mithril tracker,
// used by the testbenches to predict the RTL.
//
// Counts are kept as unbounded 64-bit integers (no wrapping), so agreement
// with the RTL's wrapping counters also checks the wrap-safe comparisons.
// Tie rules match the RTL: the highest index wins for both the maximum and
// the minimum, as in the paper's worked example.
package mithril_ref_pkg;

  class mithril_ref;
    int     n;
    int     ad_th;
    bit     valid[];
    int     addr[];
    longint cnt[];
    int     max_ptr;
    int     min_ptr;

    function new(int n_entry, int ad_th_i);
      n      = n_entry;
      ad_th  = ad_th_i;
      valid  = new[n];
      addr   = new[n];
      cnt    = new[n];
      foreach (cnt[i]) begin valid[i] = 0; addr[i] = 0; cnt[i] = 0; end
      max_ptr = n - 1;
      min_ptr = n - 1;
    endfunction

    function void find();
      max_ptr = 0;
      min_ptr = 0;
      for (int i = 1; i < n; i++) begin
        if (cnt[i] >= cnt[max_ptr]) max_ptr = i;
        if (cnt[i] <= cnt[min_ptr]) min_ptr = i;
      end
    endfunction

    function longint min_val();  return cnt[min_ptr];                 endfunction
    function longint max_diff(); return cnt[max_ptr] - cnt[min_ptr]; endfunction
    function bit     flag();     return max_diff() < longint'(ad_th); endfunction

    // ACT: returns 1 on a hit
    function bit act(int row);
      for (int i = 0; i < n; i++)
        if (valid[i] && addr[i] == row) begin
          cnt[i]++;
          find();
          return 1;
        end
      valid[min_ptr] = 1;
      addr[min_ptr]  = row;
      cnt[min_ptr]++;
      find();
      return 0;
    endfunction

    // RFM: returns 1 when a preventive refresh is done; aggr = its row
    function bit rfm(output int aggr);
      aggr = addr[max_ptr];
      if (!valid[max_ptr] || max_diff() < longint'(ad_th)) return 0;
      cnt[max_ptr] = cnt[min_ptr];
      find();
      return 1;
    endfunction

    // estimated count of a row (on-table: its counter, off-table: the minimum)
    function longint estimate(int row);
      for (int i = 0; i < n; i++)
        if (valid[i] && addr[i] == row) return cnt[i];
      return min_val();
    endfunction
  endclass

endpackage
