// tetris_ref_pkg: software reference of the Tetris rearrangement strategy used
// by the testbenches. It follows the set formulation literally: the smallest
// element m_i of every non-empty R_i, a stable ascending sort of the m_i, the
// first n columns of the sort as T, T sorted, and the k-th atom (in column
// order) sent to the k-th element of T. Written with queues and sorting so it
// shares no structure with the ranking logic of the hardware.
package tetris_ref_pkg;
  typedef int iq_t[$];

  // Plan one row. R[i] holds the open target rows of column i in ascending
  // order and is updated; assigned[i] collects the rows whose atom goes to i.
  function automatic void plan_row(ref iq_t R[], ref iq_t assigned[], input int row,
                                   input iq_t occ_cols, input int K,
                                   output iq_t src, output iq_t dst);
    iq_t P, T;
    int n;
    src = {}; dst = {};
    // columns with a non-empty R, to be sorted by (min R_i, i)
    for (int i = 0; i < R.size(); i++) if (R[i].size() > 0) P.push_back(i);
    // stable insertion sort on m_i
    for (int a = 1; a < P.size(); a++) begin
      int key, b;
      key = P[a]; b = a - 1;
      while (b >= 0 && R[P[b]][0] > R[key][0]) begin P[b+1] = P[b]; b--; end
      P[b+1] = key;
    end
    n = occ_cols.size();
    if (n > K) n = K;
    for (int a = 0; a < n && a < P.size(); a++) T.push_back(P[a]);
    T.sort();
    for (int a = 0; a < T.size(); a++) begin
      src.push_back(occ_cols[a]);
      dst.push_back(T[a]);
      void'(R[T[a]].pop_front());
      assigned[T[a]].push_back(row);
    end
  endfunction

  // Compression of one column: k-th assigned row to k-th target row.
  function automatic void plan_col(input iq_t assigned_rows, input iq_t target_rows,
                                   output iq_t src, output iq_t dst);
    src = {}; dst = {};
    for (int a = 0; a < assigned_rows.size() && a < target_rows.size(); a++) begin
      src.push_back(assigned_rows[a]);
      dst.push_back(target_rows[a]);
    end
  endfunction
endpackage
