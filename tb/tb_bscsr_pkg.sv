// Testbench helpers: random sparse matrices in BS-CSR form and a reference
// model of the approximate Top-k of one partition.
//
// bscsr_matrix builds a random partition (rows with a given range of
// non-zeros, values and x drawn uniformly below a bound so that no sum
// saturates), packs it greedily into B-entry packets exactly as the format
// prescribes, and works out independently of the RTL:
//   - each row's dot product with x, with products truncated to Q1.(V-1);
//   - in which packet each row is finished and which rows are dropped
//     because more than r rows finish in one packet;
//   - the expected Top-k values of the rows that are kept.
// check() compares k reported (valid, value, row) results with this model: the
// multiset of values must equal the expected one, and every reported row must
// exist, be kept, carry its own value and appear once.
package tb_bscsr_pkg;

  class bscsr_matrix #(int B = 15, int V = 20, int IW = 10, int PW = 4,
                       int R = 4, int K = 8, int M = 1024);
    localparam int F = V - 1;

    int              nrows;
    int              row_len[];     // non-zeros per row
    int              row_of[$];     // row of each non-zero, in order
    int              col[$];
    longint          val[$];
    longint          x[];
    longint          rowsum[];
    bit              dropped[];
    logic [511:0]    pkts[$];
    int              n_cont, n_newrow, n_dropped, n_multi_fin, n_padded;

    function new(int nrows_i, int min_nnz, int max_nnz, longint maxcode, int seed_shift = 0);
      nrows = nrows_i;
      x = new[M];
      foreach (x[i]) x[i] = longint'($urandom) % maxcode;
      row_len = new[nrows];
      foreach (row_len[rw]) begin
        row_len[rw] = min_nnz + int'($urandom % (max_nnz - min_nnz + 1));
        for (int e = 0; e < row_len[rw]; e++) begin
          row_of.push_back(rw);
          col.push_back(int'($urandom % M));
          val.push_back(longint'($urandom) % maxcode);
        end
      end
      compute_sums();
      pack();
    endfunction

    // Rebuild the partition with the given number of non-zeros per row.
    function void set_rows(int lens[$], longint maxcode, int ncols = M);
      nrows = lens.size();
      row_len = new[nrows];
      row_of.delete(); col.delete(); val.delete();
      foreach (lens[rw]) begin
        row_len[rw] = lens[rw];
        for (int e = 0; e < lens[rw]; e++) begin
          row_of.push_back(rw);
          col.push_back(int'($urandom % ncols));
          val.push_back(longint'($urandom) % maxcode);
        end
      end
      compute_sums();
      pack();
    endfunction

    function void compute_sums();
      rowsum = new[nrows];
      foreach (rowsum[i]) rowsum[i] = 0;
      foreach (row_of[e]) rowsum[row_of[e]] += (val[e] * x[col[e]]) >> F;
      foreach (rowsum[i])
        if (rowsum[i] >= (longint'(1) << V)) $fatal(1, "tb: row sum saturates, lower maxcode");
    endfunction

    function void pack();
      int nnz = row_of.size();
      int npk = (nnz + B - 1) / B;
      int prev_last_row = -1;
      pkts.delete();
      dropped = new[nrows];
      foreach (dropped[i]) dropped[i] = 0;
      n_cont = 0; n_newrow = 0; n_dropped = 0; n_multi_fin = 0; n_padded = 0;
      for (int p = 0; p < npk; p++) begin
        logic [511:0] pk = '0;
        int lo = p * B;
        int hi = (lo + B < nnz) ? lo + B : nnz;
        int seg_rows[$];
        int seg_end[$];
        int fin_rows[$];
        bit new_row = (lo == 0) || (row_of[lo] != row_of[lo-1]);
        for (int e = lo; e < hi; e++) begin
          if (e == lo || row_of[e] != row_of[e-1]) begin
            seg_rows.push_back(row_of[e]);
            seg_end.push_back(0);
          end
          seg_end[seg_end.size()-1] = e - lo + 1;
        end
        pk[0] = new_row;
        foreach (seg_end[s]) pk[1 + s*PW +: PW] = PW'(seg_end[s]);
        for (int e = lo; e < hi; e++) begin
          pk[1 + B*PW + (e-lo)*IW +: IW] = IW'(col[e]);
          pk[1 + B*PW + B*IW + (e-lo)*V +: V] = V'(val[e]);
        end
        if (hi - lo < B || seg_rows.size() < B) n_padded++;
        pkts.push_back(pk);
        if (p > 0 && new_row) fin_rows.push_back(prev_last_row);
        if (!new_row) n_cont++; else n_newrow++;
        for (int s = 0; s < seg_rows.size() - 1; s++) fin_rows.push_back(seg_rows[s]);
        if (p == npk - 1) fin_rows.push_back(seg_rows[seg_rows.size()-1]);
        if (fin_rows.size() > 1) n_multi_fin++;
        foreach (fin_rows[i])
          if (i >= R) begin dropped[fin_rows[i]] = 1; n_dropped++; end
        prev_last_row = seg_rows[seg_rows.size()-1];
      end
    endfunction

    // Give the last n rows the largest values, so that the rows of the
    // partition's final packet must reach the results.
    function void boost_last(int n, longint code);
      foreach (row_of[e]) if (row_of[e] >= nrows - n) val[e] = code;
      compute_sums();
      pack();
    endfunction

    // Expected Top-k values (descending) of the kept rows.
    function void expected(ref longint ev[$]);
      longint all[$];
      ev.delete();
      foreach (rowsum[i]) if (!dropped[i]) all.push_back(rowsum[i]);
      all.rsort();
      for (int i = 0; i < K && i < all.size(); i++) ev.push_back(all[i]);
    endfunction

    // Returns the number of failed checks; adds the number made to checks.
    function int check(bit vld[], longint rv[], longint ri[], ref int checks, input string tag);
      longint ev[$], got[$];
      int fails = 0;
      bit seen[longint];
      expected(ev);
      foreach (vld[i]) begin
        if (!vld[i]) continue;
        checks++;
        if (ri[i] < 0 || ri[i] >= nrows || dropped[ri[i]] || rowsum[ri[i]] != rv[i] || seen.exists(ri[i])) begin
          fails++;
          $display("%s: bad result row=%0d val=%0d (row sum %0d)", tag, ri[i], rv[i],
                   (ri[i] >= 0 && ri[i] < nrows) ? rowsum[ri[i]] : -1);
        end
        seen[ri[i]] = 1;
        got.push_back(rv[i]);
      end
      got.rsort();
      checks++;
      if (got.size() != ev.size()) begin
        fails++;
        $display("%s: %0d results, expected %0d", tag, got.size(), ev.size());
      end else begin
        foreach (ev[i]) begin
          checks++;
          if (got[i] != ev[i]) begin
            fails++;
            $display("%s: rank %0d value %0d, expected %0d", tag, i, got[i], ev[i]);
          end
        end
      end
      return fails;
    endfunction
  endclass

endpackage
