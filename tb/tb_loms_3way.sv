// tb_loms_3way: self-checking testbench for the 3c_7r 3-way List Offset Merge Sorter.
//
// Part 1 checks the setup array wiring against the published 3c_7r layout (Row 6:
// A_06 A_05 A_04 ... Row 0: C_02 C_01 C_00) by giving every input a distinct tag.
// Part 2 applies every 0-1 input (each list sorted, so a list is fixed by its number
// of ones: 8*8*8 = 512 cases); by the 0-1 principle for comparator networks this covers
// all inputs. Part 3 applies random sorted lists with ties and the full 32-bit range.
// Every case checks all 21 merged outputs and the median, which must equal the 11th
// value and be produced after stage 2. Combinational: checked 1 ns after each change.
module tb_loms_3way;
  int checks   = 0;
  int failures = 0;

  logic [31:0] a [7], b [7], c [7];
  logic [31:0] merged [21];
  logic [31:0] median;

  loms_3way #(.W(32)) dut (
    .a_list(a), .b_list(b), .c_list(c), .merged(merged), .median(median)
  );

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic apply_and_check(input string what);
    logic [31:0] q[$];
    q.delete();
    for (int i = 0; i < 7; i++) begin
      q.push_back(a[i]); q.push_back(b[i]); q.push_back(c[i]);
    end
    q.sort();
    #1;
    for (int k = 0; k < 21; k++) check($sformatf("%s merged[%0d]", what, k), merged[k], q[k]);
    check($sformatf("%s median", what), median, q[10]);
    check($sformatf("%s stage-2 median cell", what), dut.s2[3][1], q[10]);
  endtask

  initial begin
    // ---------------------------------------------------------- part 1: setup layout
    // tag = list*100 + index, e.g. 106 is A_06, 200 is B_00, 302 is C_02
    for (int i = 0; i < 7; i++) begin
      a[i] = 32'(100 + i); b[i] = 32'(200 + i); c[i] = 32'(300 + i);
    end
    #1;
    begin
      static int exp_setup [7][3] = '{                 // [row][col], row 0 / col 0 first
        '{300, 301, 302},                              // Row 0: C_02 C_01 C_00 (col2..col0)
        '{303, 304, 305},                              // Row 1: C_05 C_04 C_03
        '{306, 200, 201},                              // Row 2: B_01 B_00 C_06
        '{202, 203, 204},                              // Row 3: B_04 B_03 B_02
        '{205, 206, 100},                              // Row 4: A_00 B_06 B_05
        '{101, 102, 103},                              // Row 5: A_03 A_02 A_01
        '{104, 105, 106}                               // Row 6: A_06 A_05 A_04
      };
      for (int r = 0; r < 7; r++)
        for (int cc = 0; cc < 3; cc++)
          check($sformatf("setup row %0d col %0d", r, cc), dut.setup[r][cc], 32'(exp_setup[r][cc]));
    end

    // ---------------------------------------------------------- part 2: all 0-1 inputs
    for (int na = 0; na <= 7; na++)
      for (int nb = 0; nb <= 7; nb++)
        for (int nc = 0; nc <= 7; nc++) begin
          for (int i = 0; i < 7; i++) begin
            a[i] = (i >= 7 - na) ? 32'd1 : 32'd0;
            b[i] = (i >= 7 - nb) ? 32'd1 : 32'd0;
            c[i] = (i >= 7 - nc) ? 32'd1 : 32'd0;
          end
          apply_and_check($sformatf("0-1 %0d/%0d/%0d", na, nb, nc));
        end

    // ---------------------------------------------------------- part 3: random lists
    for (int it = 0; it < 2000; it++) begin
      logic [31:0] qa[$], qb[$], qc[$];
      qa.delete(); qb.delete(); qc.delete();
      for (int i = 0; i < 7; i++) begin
        qa.push_back((it % 2 == 0) ? 32'($urandom_range(9)) : $urandom);
        qb.push_back((it % 2 == 0) ? 32'($urandom_range(9)) : $urandom);
        qc.push_back((it % 2 == 0) ? 32'($urandom_range(9)) : $urandom);
      end
      qa.sort(); qb.sort(); qc.sort();
      for (int i = 0; i < 7; i++) begin
        a[i] = qa[i]; b[i] = qb[i]; c[i] = qc[i];
      end
      apply_and_check($sformatf("random it=%0d", it));
    end

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
