// loms_3way: 3c_7r 3-way List Offset Merge Sorter, with early median output.
//
// Merges three sorted lists A, B and C of 7 values each into one sorted list of 21
// values in three stages on a 3-column, 7-row array:
//   setup   The lists are laid into the array one after another, largest value first,
//           row by row from the top, every row from Col 2 to Col 0:
//             Row 6: A_06 A_05 A_04     Row 3: B_04 B_03 B_02     Row 0: C_02 C_01 C_00
//             Row 5: A_03 A_02 A_01     Row 2: B_01 B_00 C_06
//             Row 4: A_00 B_06 B_05     Row 1: C_05 C_04 C_03
//           Each list therefore starts one column to the right of the previous one
//           (the list offset). This placement is wiring only.
//   stage 1 Each full column (7 values) is sorted, largest to Row 6.
//   stage 2 Each row is sorted in serpentine order: even rows have their largest value
//           in Col 2, odd rows in Col 0. After this stage the median (11th of 21) is
//           final at Row 3 Col 1 and is brought out on `median`.
//   stage 3 Pairs of cells at each turn of the serpentine are sorted, larger value to
//           the upper row: in Col 0 rows 6/5, 4/3, 2/1; in Col 2 rows 5/4, 3/2, 1/0.
//           Col 1 is not touched.
//   output  Reading the serpentine from Row 6 Col 2 down to Row 0 Col 0 gives the merged
//           list in descending order.
// Follows the described design: the setup array, the serpentine order, the median
// position and the pair-only third stage in the edge columns. This design's own
// choices: which pairs the third stage sorts (the three turns in each edge column,
// all of them needed, as an exhaustive 0-1 check of the network confirms), the use of
// single-stage N-sorters (7-sorters) as the stage-1 column sorters, and 2-sorters in
// stage 3. The 3-column, 7-row shape is fixed; only the value width W is a parameter.
//
// Interface: a_list/b_list/c_list[7] sorted, element 0 smallest; merged[21] sorted,
//            element 0 smallest; median = merged[10], after two stages only.
// Timing: purely combinational.
module loms_3way #(
  parameter int unsigned W = 32
) (
  input  logic [W-1:0] a_list [7],
  input  logic [W-1:0] b_list [7],
  input  logic [W-1:0] c_list [7],
  output logic [W-1:0] merged [21],
  output logic [W-1:0] median
);

  localparam int unsigned K = 3;      // lists = columns
  localparam int unsigned R = 7;      // values per list = rows
  localparam int unsigned N = K * R;

  // Arrays indexed [row][col], row 0 at the bottom, col 0 at the right.
  logic [W-1:0] setup [R][K];
  logic [W-1:0] s1    [R][K];
  logic [W-1:0] s2    [R][K];
  logic [W-1:0] s3    [R][K];

  // ---------------------------------------------------------------- setup array
  for (genvar p = 0; p < N; p++) begin : g_setup
    if (p < R) begin : g_a
      assign setup[R-1-p/K][K-1-p%K] = a_list[R-1-p];
    end else if (p < 2*R) begin : g_b
      assign setup[R-1-p/K][K-1-p%K] = b_list[2*R-1-p];
    end else begin : g_c
      assign setup[R-1-p/K][K-1-p%K] = c_list[3*R-1-p];
    end
  end

  // ---------------------------------------------------------------- stage 1: columns
  for (genvar c = 0; c < K; c++) begin : g_col
    logic [W-1:0] cin  [R];
    logic [W-1:0] cout [R];
    for (genvar r = 0; r < R; r++) begin : g_r
      assign cin[r]   = setup[r][c];
      assign s1[r][c] = cout[r];
    end
    n_sorter #(.W(W), .N(R)) u_col (.din(cin), .dout(cout));
  end

  // ---------------------------------------------------------------- stage 2: serpentine rows
  for (genvar r = 0; r < R; r++) begin : g_row
    logic [W-1:0] rin  [K];
    logic [W-1:0] rout [K];
    for (genvar c = 0; c < K; c++) begin : g_c
      assign rin[c] = s1[r][c];
      if (r % 2 == 0) begin : g_even
        assign s2[r][c] = rout[c];          // largest in Col 2
      end else begin : g_odd
        assign s2[r][c] = rout[K-1-c];      // largest in Col 0
      end
    end
    n_sorter #(.W(W), .N(K)) u_row (.din(rin), .dout(rout));
  end

  assign median = s2[R/2][1];

  // ---------------------------------------------------------------- stage 3: turn pairs
  // The serpentine turns between row r+1 and row r in Col 0 when r+1 is even and in
  // Col 2 when r+1 is odd; those two cells are sorted, every other cell passes.
  for (genvar r = 0; r < R; r++) begin : g_s3
    for (genvar c = 0; c < K; c++) begin : g_c
      localparam bit LOWER = (r + 1 < R) && (c == (((r + 1) % 2 == 0) ? 0 : K - 1));
      localparam bit UPPER = (r > 0)     && (c == ((r % 2 == 0) ? 0 : K - 1));
      if (LOWER) begin : g_pair
        logic [W-1:0] pin  [2];
        logic [W-1:0] pout [2];
        assign pin[0] = s2[r][c];
        assign pin[1] = s2[r+1][c];
        n_sorter #(.W(W), .N(2)) u_pair (.din(pin), .dout(pout));
        assign s3[r][c]   = pout[0];
        assign s3[r+1][c] = pout[1];
      end else if (!UPPER) begin : g_pass
        assign s3[r][c] = s2[r][c];
      end
    end
  end

  // ---------------------------------------------------------------- serpentine read-out
  for (genvar q = 0; q < N; q++) begin : g_out
    localparam int unsigned ROW = R - 1 - q / K;
    localparam int unsigned COL = (ROW % 2 == 0) ? K - 1 - q % K : q % K;
    assign merged[N-1-q] = s3[ROW][COL];
  end

endmodule
