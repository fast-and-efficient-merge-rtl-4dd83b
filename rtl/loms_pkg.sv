// loms_pkg: constants, types and elaboration-time helper functions shared by the
// List Offset Merge Sorter (LOMS) modules.
//
// Conventions used everywhere in this design:
//   * A list of N values is an unpacked array [N] whose element 0 is the minimum and
//     element N-1 the maximum (value "_00" is the smallest of a list).
//   * Values are unsigned integers of a width W set per module.
//   * Ties between the UP list and the DN list resolve in favour of the UP list, i.e.
//     an UP value that equals a DN value is placed above it (the ge_* comparisons).
//
// The 2-way setup-array helpers below describe where each input lands in the
// List Offset setup array, and how the array looks after each column has been
// sorted (unpopulated cells collected at the bottom of their column):
//   * The UP list fills the top rows, largest value first, left to right
//     (Col NCOL-1 down to Col 0) in every row.
//   * The DN list fills the rows below, largest value first, right to left
//     (Col 0 up to Col NCOL-1), so its row order is the reverse of the UP rows.
//   Position p (0 = first placed) of the UP list lands in Col NCOL-1-(p mod NCOL);
//   position p of the DN list lands in Col (p mod NCOL).
package loms_pkg;

  // How the UP-2/DN-2 single-stage merge equations are written: with two data bits per
  // LUT and a 2-to-1 mux (LUT_2INS), or with all four data bits in one LUT (LUT_4INS).
  // Both styles compute the same function; only the FPGA mapping differs.
  typedef enum logic {
    LUT_2INS = 1'b0,
    LUT_4INS = 1'b1
  } lut_style_e;

  function automatic int cdiv(input int a, input int b);
    return (a + b - 1) / b;
  endfunction

  // Number of UP-list values that land in column c.
  function automatic int up_in_col(input int nup, input int ncol, input int c);
    int first;
    first = ncol - 1 - c;           // first UP position that lands in column c
    return (nup > first) ? cdiv(nup - first, ncol) : 0;
  endfunction

  // Number of DN-list values that land in column c.
  function automatic int dn_in_col(input int ndn, input int ncol, input int c);
    return (ndn > c) ? cdiv(ndn - c, ncol) : 0;
  endfunction

  // Index into the UP list of the m-th smallest UP value of column c.
  function automatic int up_src(input int nup, input int ncol, input int c, input int m);
    int k;
    k = up_in_col(nup, ncol, c) - 1 - m;   // placement order inside the column, 0 = top
    return nup - 1 - (ncol - 1 - c) - k * ncol;
  endfunction

  // Index into the DN list of the m-th smallest DN value of column c.
  function automatic int dn_src(input int ndn, input int ncol, input int c, input int m);
    int k;
    k = dn_in_col(ndn, ncol, c) - 1 - m;
    return ndn - 1 - c - k * ncol;
  endfunction

  // Height of column c after unpopulated cells slid to its bottom.
  function automatic int col_height(input int nup, input int ndn, input int ncol, input int c);
    return up_in_col(nup, ncol, c) + dn_in_col(ndn, ncol, c);
  endfunction

  // Number of rows left once fully unpopulated rows have been removed.
  function automatic int num_rows(input int nup, input int ndn, input int ncol);
    int r;
    r = 0;
    for (int c = 0; c < ncol; c++)
      if (col_height(nup, ndn, ncol, c) > r) r = col_height(nup, ndn, ncol, c);
    return r;
  endfunction

  // Populated cells in row t, counted from the top row (t = 0).
  function automatic int row_pop(input int nup, input int ndn, input int ncol, input int t);
    int n;
    n = 0;
    for (int c = 0; c < ncol; c++)
      if (col_height(nup, ndn, ncol, c) > t) n++;
    return n;
  endfunction

  // Column of the k-th populated cell of row t, scanning from Col NCOL-1 to Col 0.
  function automatic int row_col(input int nup, input int ndn, input int ncol,
                                 input int t, input int k);
    int n;
    n = 0;
    for (int c = ncol - 1; c >= 0; c--)
      if (col_height(nup, ndn, ncol, c) > t) begin
        if (n == k) return c;
        n++;
      end
    return 0;
  endfunction

  // Number of populated cells in all rows above row t (rows counted from the top).
  function automatic int rows_above(input int nup, input int ndn, input int ncol, input int t);
    int n;
    n = 0;
    for (int r = 0; r < t; r++) n += row_pop(nup, ndn, ncol, r);
    return n;
  endfunction

endpackage
