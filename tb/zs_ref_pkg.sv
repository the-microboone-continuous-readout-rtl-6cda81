// zs_ref_pkg: independent reference model of the zero-suppressed word stream,
// used by the testbenches. zs_frame_words returns the words one FEM emits for
// one frame, given the raw samples of every channel (adc[ch][tick]), the
// per-channel baseline and threshold, NPRE/NPOST and the keep-all switch.
// A sample t is saved when some sample in [t-NPOST, t+NPRE] (clipped to the
// channel) lies strictly outside baseline +/- threshold.
package zs_ref_pkg;
  typedef int unsigned uarr_t[];
  typedef uarr_t uarr2_t[];

  function automatic void zs_frame_words(
      ref int unsigned q[$], input uarr2_t adc, input uarr_t base, input uarr_t thr,
      input int npre, input int npost, input bit keep_all,
      input int unsigned fem_id, input int unsigned frame);
    int nch = adc.size();
    q.push_back(32'h1000 | (fem_id & 'hFFF));
    q.push_back(32'h2000 | (frame & 'hFFF));
    for (int c = 0; c < nch; c++) begin
      int n = adc[c].size();
      bit pass[] = new[n];
      bit prev = 0;
      q.push_back(32'h3000 | c);
      for (int t = 0; t < n; t++) begin
        int d = int'(adc[c][t]) - int'(base[c]);
        if (d < 0) d = -d;
        pass[t] = keep_all || (d > int'(thr[c]));
      end
      for (int t = 0; t < n; t++) begin
        bit keep = 0;
        for (int k = t - npost; k <= t + npre; k++)
          if (k >= 0 && k < n && pass[k]) keep = 1;
        if (keep && !prev) q.push_back(32'h4000 | t);
        if (keep) q.push_back(adc[c][t] & 'hFFF);
        prev = keep;
      end
    end
    q.push_back(32'hF000 | (frame & 'hFFF));
  endfunction
endpackage
