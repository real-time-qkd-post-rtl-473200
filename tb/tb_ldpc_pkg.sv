// tb_ldpc_pkg: random sparse parity-check matrices for the LDPC tests.
//
// make_h draws a matrix with m rows and n columns in which every column has
// three ones in distinct rows and every row at least one, and returns it as
// the row-ordered column-index list the RTL loads, with row-end flags.
// syndrome computes H x straight from that list.
package tb_ldpc_pkg;

  class hmat;
    int n, m;
    int cols [];      // edge list, row after row
    bit ends [];
    int row_deg [];

    function new(int n_, int m_, int wc = 3);
      int cr [];        // rows of column c: cr[wc*c +: wc]
      int fillp [];
      int first [];
      n = n_; m = m_;
      cr = new[n*wc];
      row_deg = new[m];
      foreach (row_deg[r]) row_deg[r] = 0;
      // each column takes wc distinct rows; the first m columns also
      // guarantee every row at least one entry
      for (int c = 0; c < n; c++) begin
        for (int k = 0; k < wc; k++) begin
          int r;
          bit dup;
          do begin
            r = (k == 0 && c < m) ? c : $urandom % m;
            dup = 0;
            for (int j = 0; j < k; j++) if (cr[wc*c + j] == r) dup = 1;
          end while (dup);
          cr[wc*c + k] = r;
          row_deg[r]++;
        end
      end
      // counting sort of the entries by row
      first = new[m];
      fillp = new[m];
      for (int r = 0; r < m; r++) begin
        first[r] = (r == 0) ? 0 : first[r-1] + row_deg[r-1];
        fillp[r] = first[r];
      end
      cols = new[n*wc];
      ends = new[n*wc];
      for (int c = 0; c < n; c++)
        for (int k = 0; k < wc; k++) begin
          cols[fillp[cr[wc*c + k]]] = c;
          fillp[cr[wc*c + k]]++;
        end
      for (int r = 0; r < m; r++)
        for (int e = first[r]; e < first[r] + row_deg[r]; e++) ends[e] = (e == first[r] + row_deg[r] - 1);
    endfunction

    function automatic void syndrome(input bit x [], output bit s []);
      int r;
      bit p;
      s = new[m];
      r = 0; p = 0;
      foreach (cols[e]) begin
        p ^= x[cols[e]];
        if (ends[e]) begin s[r] = p; p = 0; r++; end
      end
    endfunction
  endclass

endpackage
