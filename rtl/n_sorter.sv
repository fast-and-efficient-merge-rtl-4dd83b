// n_sorter: single-stage N-sorter.
//
// Sorts N unsorted values in one stage. All N*(N-1)/2 pairs are compared in parallel;
// each input's rank (how many inputs end up below it) is the sum of its comparison
// results, and each output takes the input whose rank equals its position. Ties are
// broken by input index (the higher index is placed above an equal lower-index value),
// so every output is selected by exactly one input.
//
// The LOMS devices use it as the row sorter (N = number of columns) and, in the 3-way
// device, as the full column sorter. Only the function "single-stage N-sorter" is taken
// from the design being documented; the rank-and-select construction is this design's
// own, chosen as the simplest one-stage circuit.
//
// Interface: din[i] in any order; dout[k] sorted, element 0 the smallest.
// Timing: purely combinational.
module n_sorter #(
  parameter int unsigned W = 32,
  parameter int unsigned N = 2
) (
  input  logic [W-1:0] din  [N],
  output logic [W-1:0] dout [N]
);

  localparam int unsigned RW = (N > 1) ? $clog2(N) : 1;

  // c[j][i] (j < i): din[i] >= din[j], i.e. din[j] is placed below din[i]
  logic             c    [N][N];
  logic [RW-1:0]    rank [N];

  always_comb begin
    for (int j = 0; j < N; j++)
      for (int i = 0; i < N; i++)
        c[j][i] = (j < i) ? (din[i] >= din[j]) : 1'b0;
  end

  always_comb begin
    for (int i = 0; i < N; i++) begin
      rank[i] = '0;
      for (int j = 0; j < N; j++) begin
        if (j < i && c[j][i])  rank[i] = rank[i] + 1'b1;
        if (j > i && !c[i][j]) rank[i] = rank[i] + 1'b1;
      end
    end
  end

  always_comb begin
    for (int k = 0; k < N; k++) begin
      dout[k] = '0;
      for (int i = 0; i < N; i++)
        if (rank[i] == RW'(k)) dout[k] = dout[k] | din[i];
    end
  end

endmodule
