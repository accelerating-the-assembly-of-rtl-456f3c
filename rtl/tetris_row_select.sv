// tetris_row_select: the column-choice step of the Tetris row-by-row
// rearrangement, in one combinational pass.
//
// Input rem[i] is the set R_i^(k) of still-unassigned target rows of column i,
// as a ROWS-bit mask. For every column, m_i is the lowest set bit of rem[i]
// (the smallest element). The algorithm sorts the m_i in ascending order and
// gives the row's n atoms to the first n columns of that order, so columns
// whose lowest open target lies in an earlier row (defects left by earlier
// moves) are served first, and ties go to the leftmost column. Here the sort
// is replaced by ranking: column i is selected when R_i is non-empty and fewer
// than n non-empty columns have a smaller key (m_j, j). That is the same set
// as the first n entries of a stable ascending sort, computed with COLS^2
// comparators instead of a sequential sort.
//
// Output sel is the mask of T^(k); nsel its size, min(n, number of non-empty
// columns). Purely combinational: the caller registers the result.
//
// The selection rule follows the described algorithm exactly; the ranking
// formulation and tie-break by column index are this implementation's.
module tetris_row_select #(
  parameter int COLS = rearr_pkg::N_COLS,
  parameter int ROWS = rearr_pkg::N_ROWS
) (
  input  logic [COLS-1:0][ROWS-1:0] rem,
  input  logic [$clog2(COLS+1)-1:0] n,
  output logic [COLS-1:0]           sel,
  output logic [$clog2(COLS+1)-1:0] nsel
);
  localparam int MW = $clog2(ROWS+1);
  localparam int CW = $clog2(COLS+1);

  logic [MW-1:0] m  [COLS];
  logic [COLS-1:0] nonempty;

  always_comb begin
    for (int i = 0; i < COLS; i++) begin
      m[i] = MW'(ROWS);
      for (int r = ROWS - 1; r >= 0; r--)
        if (rem[i][r]) m[i] = MW'(r);
      nonempty[i] = |rem[i];
    end
  end

  always_comb begin
    nsel = '0;
    for (int i = 0; i < COLS; i++) begin
      logic [CW-1:0] rank;
      rank = '0;
      for (int j = 0; j < COLS; j++)
        if (nonempty[j] && ((m[j] < m[i]) || ((m[j] == m[i]) && (j < i))))
          rank = rank + 1'b1;
      sel[i] = nonempty[i] && (rank < n);
      nsel   = nsel + CW'(sel[i]);
    end
  end
endmodule
