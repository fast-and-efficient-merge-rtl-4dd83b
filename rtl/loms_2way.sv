// loms_2way: 2-way List Offset Merge Sorter (UP-NUP / DN-NDN, NCOL columns).
//
// Merges two sorted lists in exactly two stages by placing them in a 2-D "setup array"
// whose row order is offset between the two lists:
//   setup   The UP list fills the top rows, largest first, each row running from its
//           maximum in Col NCOL-1 (left) to its minimum in Col 0 (right). The DN list
//           fills the rows underneath, largest first, each row running the other way
//           (maximum in Col 0). Cells a short list leaves empty are slid to the bottom
//           of their column, and rows left fully empty are dropped. All of this is
//           wiring: it costs no logic.
//   stage 1 Every column holds a descending run of UP values above a descending run of
//           DN values, so each column is sorted with a single-stage 2-way merge sorter
//           (s2ms). A column holding values of only one list is already sorted and gets
//           no sorter. After this stage every value is in its final row.
//   stage 2 Every row is sorted with a single-stage N-sorter (n_sorter, N = NCOL),
//           largest value to Col NCOL-1. A row with a single value needs no sorter.
//   output  Reading the rows from the top, each from Col NCOL-1 to Col 0, gives the
//           merged list in descending order.
// List sizes may be unequal, odd or even, and NCOL may be any value >= 2. More columns
// make the column sorters smaller and the row sorters larger.
//
// Follows the described design: the setup array, the slide of unpopulated cells, the
// removal of empty rows, the two stages and their sorter types. This design's own
// choices: lists are given with element 0 the smallest, values are unsigned, and the
// default is UP-32/DN-32 with 2 columns (16_16 column sorters), 32-bit values.
//
// Interface: up_list[NUP], dn_list[NDN] sorted (element 0 smallest);
//            merged[NUP+NDN] sorted (element 0 smallest).
// Timing: purely combinational; delay is one s2ms plus one n_sorter.
module loms_2way
  import loms_pkg::*;
#(
  parameter int unsigned W         = 32,
  parameter int unsigned NUP       = 32,
  parameter int unsigned NDN       = 32,
  parameter int unsigned NCOL      = 2,
  parameter lut_style_e  LUT_STYLE = LUT_2INS
) (
  input  logic [W-1:0] up_list [NUP],
  input  logic [W-1:0] dn_list [NDN],
  output logic [W-1:0] merged  [NUP+NDN]
);

  localparam int unsigned N  = NUP + NDN;
  localparam int unsigned NR = num_rows(NUP, NDN, NCOL);

  // Array after the stage-1 column sorts: colv[c][t], row t counted from the top.
  logic [W-1:0] colv [NCOL][NR];

  // ---------------------------------------------------------------- stage 1: columns
  for (genvar c = 0; c < NCOL; c++) begin : g_col
    localparam int unsigned NA = up_in_col(NUP, NCOL, c);
    localparam int unsigned NB = dn_in_col(NDN, NCOL, c);
    localparam int unsigned H  = NA + NB;

    if (NA > 0 && NB > 0) begin : g_sort
      logic [W-1:0] cu [NA];
      logic [W-1:0] cd [NB];
      logic [W-1:0] cm [H];
      for (genvar m = 0; m < NA; m++) begin : g_u
        assign cu[m] = up_list[up_src(NUP, NCOL, c, m)];
      end
      for (genvar m = 0; m < NB; m++) begin : g_d
        assign cd[m] = dn_list[dn_src(NDN, NCOL, c, m)];
      end
      s2ms #(.W(W), .NUP(NA), .NDN(NB), .LUT_STYLE(LUT_STYLE)) u_s2ms (
        .up(cu), .dn(cd), .merged(cm)
      );
      for (genvar t = 0; t < H; t++) begin : g_o
        assign colv[c][t] = cm[H-1-t];
      end
    end else if (NA > 0) begin : g_up_only
      for (genvar t = 0; t < H; t++) begin : g_o
        assign colv[c][t] = up_list[up_src(NUP, NCOL, c, H-1-t)];
      end
    end else if (NB > 0) begin : g_dn_only
      for (genvar t = 0; t < H; t++) begin : g_o
        assign colv[c][t] = dn_list[dn_src(NDN, NCOL, c, H-1-t)];
      end
    end
    // Unpopulated cells at the bottom of a short column are never read.
    for (genvar t = H; t < NR; t++) begin : g_empty
      assign colv[c][t] = '0;
    end
  end

  // ---------------------------------------------------------------- stage 2: rows
  for (genvar t = 0; t < NR; t++) begin : g_row
    localparam int unsigned P    = row_pop(NUP, NDN, NCOL, t);
    localparam int unsigned BASE = rows_above(NUP, NDN, NCOL, t);
    if (P > 1) begin : g_sort
      logic [W-1:0] rin  [P];
      logic [W-1:0] rout [P];
      for (genvar k = 0; k < P; k++) begin : g_i
        assign rin[k] = colv[row_col(NUP, NDN, NCOL, t, k)][t];
        assign merged[N-1-BASE-k] = rout[P-1-k];
      end
      n_sorter #(.W(W), .N(P)) u_row (.din(rin), .dout(rout));
    end else begin : g_single
      assign merged[N-1-BASE] = colv[row_col(NUP, NDN, NCOL, t, 0)][t];
    end
  end

endmodule
