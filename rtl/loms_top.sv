// loms_top: the two List Offset Merge Sorter devices side by side.
//
// List Offset merge sorting places several sorted lists in a 2-D array with the order
// of each list offset from the others, and then alternates parallel column sorts with
// parallel row sorts until the whole array is in order. This top level holds the two
// devices of that family that are fully specified:
//   * u_two_way   a 2-way LOMS merging an UP list of NUP values with a DN list of NDN
//                 values in two stages (column merge, then row sort). Default:
//                 UP-32/DN-32, 2 columns, 32-bit values, i.e. 64 outputs.
//   * u_three_way the 3c_7r 3-way LOMS merging three 7-value lists in three stages, with
//                 the median of the 21 values available after two stages.
// The two devices share nothing; they are independent combinational merge networks.
//
// Interface: all lists are unpacked arrays with element 0 the smallest value.
// Timing: purely combinational from every input to every output, as characterised;
// a user who needs a clocked design registers the ports around it.
module loms_top
  import loms_pkg::*;
#(
  parameter int unsigned W         = 32,
  parameter int unsigned NUP       = 32,
  parameter int unsigned NDN       = 32,
  parameter int unsigned NCOL      = 2,
  parameter lut_style_e  LUT_STYLE = LUT_2INS
) (
  // 2-way merge
  input  logic [W-1:0] up_list  [NUP],
  input  logic [W-1:0] dn_list  [NDN],
  output logic [W-1:0] merged2  [NUP+NDN],
  // 3-way 3c_7r merge
  input  logic [W-1:0] a_list   [7],
  input  logic [W-1:0] b_list   [7],
  input  logic [W-1:0] c_list   [7],
  output logic [W-1:0] merged3  [21],
  output logic [W-1:0] median3
);

  loms_2way #(
    .W(W), .NUP(NUP), .NDN(NDN), .NCOL(NCOL), .LUT_STYLE(LUT_STYLE)
  ) u_two_way (
    .up_list(up_list), .dn_list(dn_list), .merged(merged2)
  );

  loms_3way #(.W(W)) u_three_way (
    .a_list(a_list), .b_list(b_list), .c_list(c_list),
    .merged(merged3), .median(median3)
  );

endmodule
