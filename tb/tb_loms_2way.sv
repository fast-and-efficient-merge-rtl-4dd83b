// tb_loms_2way: self-checking testbench for the 2-way List Offset Merge Sorter.
//
// Part 1 replays the UP-8/DN-8 worked example of the 2-column device: the A list
// {15,14,13,10,9,6,5,1} and the B list {16,12,11,8,7,4,3,2}. It checks the array after
// the stage-1 column sorts cell by cell (Col 1 / Col 0 from the top row: 15/16, 13/14,
// 12/11, 9/10, 8/7, 5/6, 4/3, 2/1) and the merged output 16..1.
// Part 2 runs random sorted lists through several shapes: the default UP-32/DN-32 with
// 2 columns, the UP-1/DN-8, UP-8/DN-1 and UP-7/DN-5 setups with unpopulated cells,
// UP-16/DN-16 with 4 and 8 columns, and unequal odd sizes with 3 and 4 columns. Every
// output is compared with a sort of the concatenated inputs done in the testbench.
// Combinational: checked 1 ns after the inputs change.
module tb_loms_2way;
  import loms_pkg::*;

  int checks   = 0;
  int failures = 0;
  int done     = 0;

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // ------------------------------------------------------------ part 1: worked example
  logic [31:0] ex_up [8];
  logic [31:0] ex_dn [8];
  logic [31:0] ex_out [16];
  loms_2way #(.W(32), .NUP(8), .NDN(8), .NCOL(2)) dut_ex (
    .up_list(ex_up), .dn_list(ex_dn), .merged(ex_out)
  );

  initial begin
    // A_00..A_07 and B_00..B_07, smallest first
    static logic [31:0] a [8] = '{1, 5, 6, 9, 10, 13, 14, 15};
    static logic [31:0] b [8] = '{2, 3, 4, 7, 8, 11, 12, 16};
    static logic [31:0] col1 [8] = '{15, 13, 12, 9, 8, 5, 4, 2};   // after column sort, top row first
    static logic [31:0] col0 [8] = '{16, 14, 11, 10, 7, 6, 3, 1};
    ex_up = a;
    ex_dn = b;
    #1;
    for (int t = 0; t < 8; t++) begin
      check($sformatf("example col1 row %0d", 7 - t), dut_ex.colv[1][t], col1[t]);
      check($sformatf("example col0 row %0d", 7 - t), dut_ex.colv[0][t], col0[t]);
    end
    for (int k = 0; k < 16; k++) check($sformatf("example out[%0d]", k), ex_out[k], 32'(k + 1));
    done++;
  end

  // ------------------------------------------------------------ part 2: random lists
  localparam int NCFG = 10;
  localparam int CFG_UP  [NCFG] = '{32, 1, 8, 7, 16, 16, 7, 5, 2, 13};
  localparam int CFG_DN  [NCFG] = '{32, 8, 1, 5, 16, 16, 11, 9, 2, 3};
  localparam int CFG_COL [NCFG] = '{ 2, 2, 2, 2,  4,  8,  3, 4, 2, 5};

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    localparam int NU = CFG_UP[g];
    localparam int ND = CFG_DN[g];
    localparam int C  = CFG_COL[g];
    logic [31:0] up  [NU];
    logic [31:0] dn  [ND];
    logic [31:0] out [NU+ND];

    loms_2way #(.W(32), .NUP(NU), .NDN(ND), .NCOL(C)) dut (
      .up_list(up), .dn_list(dn), .merged(out)
    );

    initial begin
      logic [31:0] qu[$], qd[$], qa[$];
      for (int it = 0; it < 300; it++) begin
        qu.delete(); qd.delete();
        for (int i = 0; i < NU; i++)
          qu.push_back((it % 3 == 0) ? 32'($urandom_range(5)) :
                       (it % 3 == 1) ? $urandom : 32'($urandom_range(200)) + ((it % 2 != 0) ? 32'd300 : 32'd0));
        for (int j = 0; j < ND; j++)
          qd.push_back((it % 3 == 0) ? 32'($urandom_range(5)) :
                       (it % 3 == 1) ? $urandom : 32'($urandom_range(200)) + ((it % 2 != 0) ? 32'd0 : 32'd300));
        qu.sort(); qd.sort();
        for (int i = 0; i < NU; i++) up[i] = qu[i];
        for (int j = 0; j < ND; j++) dn[j] = qd[j];
        qa = {qu, qd};
        qa.sort();
        #1;
        for (int k = 0; k < NU + ND; k++)
          check($sformatf("UP-%0d/DN-%0d %0dcol it=%0d out[%0d]", NU, ND, C, it, k), out[k], qa[k]);
      end
      done++;
    end
  end

  initial begin
    wait (done == NCFG + 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
