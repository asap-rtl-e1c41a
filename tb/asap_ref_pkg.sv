// asap_ref_pkg: independent reference model of the ASAP lattice for testbenches.
//
// Computes, by dynamic programming in software, the cycle in which every
// delay element of an LQ x LR lattice first raises its output after the start
// signal rises: t(i,j) = min of t(source) + penalty + crossings over the
// three sources (diagonal with match/mismatch penalty, left with deletion,
// up with insertion), where crossings is the number of tile edges between the
// source and (i,j) (one per edge, two for a diagonal corner). D(0,0) takes the
// start signal on its diagonal input at time 0. Tiles outside the LV band are
// absent (infinite time). Also provides a textbook edit distance for
// comparison and a random nucleotide generator.
package asap_ref_pkg;

  localparam int INF = 1 << 28;

  typedef int time_grid_t[][];

  function automatic time_grid_t lattice_times(
      input byte unsigned rd[], input byte unsigned rf[],
      input int pm, input int pmm, input int pins, input int pdel,
      input int T, input int band);
    int lq = rd.size(), lr = rf.size();
    time_grid_t t;
    t = new[lq];
    foreach (t[i]) t[i] = new[lr];
    for (int i = 0; i < lq; i++) begin
      for (int j = 0; j < lr; j++) begin
        int best = INF;
        int ti = i / T, tj = j / T;
        bit kept = (band == 0) || ((ti > tj ? ti - tj : tj - ti) <= band);
        if (kept) begin
          int pdiag = (rd[i] == rf[j]) ? pm : pmm;
          if (i == 0 && j == 0) best = pdiag;
          if (i > 0 && j > 0 && t[i-1][j-1] < INF) begin
            int c = ((i-1)/T != ti) + ((j-1)/T != tj);
            if (t[i-1][j-1] + c + pdiag < best) best = t[i-1][j-1] + c + pdiag;
          end
          if (j > 0 && t[i][j-1] < INF) begin
            int c = ((j-1)/T != tj);
            if (t[i][j-1] + c + pdel < best) best = t[i][j-1] + c + pdel;
          end
          if (i > 0 && t[i-1][j] < INF) begin
            int c = ((i-1)/T != ti);
            if (t[i-1][j] + c + pins < best) best = t[i-1][j] + c + pins;
          end
        end
        t[i][j] = best;
      end
    end
    return t;
  endfunction

  // Result of one comparison: SW = earliest on the last row, NW = corner.
  function automatic int ref_result(input byte unsigned rd[], input byte unsigned rf[],
      input int pm, input int pmm, input int pins, input int pdel,
      input int T, input int band, input bit nw);
    time_grid_t t = lattice_times(rd, rf, pm, pmm, pins, pdel, T, band);
    int lq = rd.size(), lr = rf.size();
    int best = INF;
    if (nw) return t[lq-1][lr-1];
    for (int j = 0; j < lr; j++) if (t[lq-1][j] < best) best = t[lq-1][j];
    return best;
  endfunction

  // Fill a reference window and a read that is the window with a few edits.
  function automatic void make_pair(input int lq, input int lr, input int edits,
                                    output byte unsigned rd[], output byte unsigned rf[]);
    int k = 0;
    rf = new[lr];
    rd = new[lq];
    foreach (rf[j]) rf[j] = byte'($urandom_range(0, 3));
    for (int i = 0; i < lq; i++) begin
      rd[i] = (k < lr) ? rf[k] : byte'($urandom_range(0, 3));
      k++;
      if ($urandom_range(0, lq - 1) < edits) begin
        int e = $urandom_range(0, 2);
        if (e == 0) rd[i] = byte'((rd[i] + 1) % 4);   // substitution
        else if (e == 1) k++;                           // deletion from read
        else k--;                                       // insertion into read
        if (k < 0) k = 0;
      end
    end
  endfunction

endpackage
