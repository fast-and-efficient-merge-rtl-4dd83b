// s2ms: Single-Stage 2-way Merge Sorter (UP-NUP / DN-NDN).
//
// Merges two sorted lists, UP (NUP values) and DN (NDN values), into one sorted list of
// NUP+NDN values in a single stage: every UP value is compared with every DN value in
// parallel (ge[i][j] = up[i] >= dn[j]), and each output is then picked from the inputs by
// a one-level select driven by those comparisons. No comparison depends on another, so
// the delay is one comparator plus one multiplexer, independent of the list sizes.
//
// How the selects are formed (generic sizes): because both lists are sorted, the row
// ge[i][*] is a thermometer code, and up[i] lands at output i+t where t is the number of
// DN values it is >= to (the position where the thermometer steps from 1 to 0). Likewise
// dn[j] lands at output j+s where s counts the UP values below it. Each output is the
// OR of the inputs whose one-hot select names it. Ties place the UP value above.
//
// For UP-2/DN-2 the module instead implements the four output equations of the
// single-stage merge literally (nested 2-to-1 selects on ge_3_1, ge_2_1, ge_3_0,
// ge_2_0, with In_3/In_2 the UP list and In_1/In_0 the DN list). LUT_STYLE selects how
// the second-lowest output is written: LUT_2INS uses ge_2_0 to choose between two
// 2-input selects; LUT_4INS feeds the four inputs, ge_2_0 and the combined signal
// (ge_2_1 || !ge_3_0) to one select, which is the denser packing. Both give the same
// values. The generic selection scheme above is this design's own choice: the single
// stage merge principle is followed, but its general equations are not spelled out.
//
// Interface: up[i], dn[j] with element 0 the smallest; merged[k], element 0 the smallest.
// Timing: purely combinational, no clock.
module s2ms
  import loms_pkg::*;
#(
  parameter int unsigned W         = 32,
  parameter int unsigned NUP       = 16,
  parameter int unsigned NDN       = 16,
  parameter lut_style_e  LUT_STYLE = LUT_2INS
) (
  input  logic [W-1:0] up     [NUP],
  input  logic [W-1:0] dn     [NDN],
  output logic [W-1:0] merged [NUP+NDN]
);

  localparam int unsigned N = NUP + NDN;

  if (NUP == 2 && NDN == 2) begin : g_up2_dn2
    logic ge_3_1, ge_3_0, ge_2_1, ge_2_0;
    logic [W-1:0] in_3, in_2, in_1, in_0;
    assign in_3 = up[1];
    assign in_2 = up[0];
    assign in_1 = dn[1];
    assign in_0 = dn[0];
    assign ge_3_1 = in_3 >= in_1;
    assign ge_3_0 = in_3 >= in_0;
    assign ge_2_1 = in_2 >= in_1;
    assign ge_2_0 = in_2 >= in_0;

    assign merged[3] = ge_3_1 ? in_3 : in_1;
    assign merged[2] = ge_3_1 ? (ge_2_1 ? in_2 : in_1) : (ge_3_0 ? in_3 : in_0);
    if (LUT_STYLE == LUT_4INS) begin : g_4ins
      logic fsel;
      assign fsel      = ge_2_1 || !ge_3_0;
      assign merged[1] = ge_2_0 ? (fsel ? in_1 : in_2) : (fsel ? in_3 : in_0);
    end else begin : g_2ins
      assign merged[1] = ge_2_0 ? (ge_2_1 ? in_1 : in_2) : (ge_3_0 ? in_0 : in_3);
    end
    assign merged[0] = ge_2_0 ? in_0 : in_2;
  end else begin : g_generic
    logic ge [NUP][NDN];
    always_comb begin
      for (int i = 0; i < NUP; i++)
        for (int j = 0; j < NDN; j++)
          ge[i][j] = up[i] >= dn[j];
    end

    always_comb begin
      for (int k = 0; k < N; k++) begin
        merged[k] = '0;
        // UP candidates: up[i] sits at i + (number of dn values it is >= to)
        for (int i = 0; i < NUP; i++) begin
          if (k - i >= 0 && k - i <= NDN) begin
            if ((k - i == 0   || ge[i][k-i-1]) &&
                (k - i == NDN || !ge[i][k-i]))
              merged[k] = merged[k] | up[i];
          end
        end
        // DN candidates: dn[j] sits at j + (number of up values below it)
        for (int j = 0; j < NDN; j++) begin
          if (k - j >= 0 && k - j <= NUP) begin
            if ((k - j == 0   || !ge[k-j-1][j]) &&
                (k - j == NUP || ge[k-j][j]))
              merged[k] = merged[k] | dn[j];
          end
        end
      end
    end
  end

endmodule
