// tb_loms_top: end-to-end testbench of loms_top at its default parameters
// (UP-32/DN-32 2-column 2-way merge and the 3c_7r 3-way merge, 32-bit values).
//
// Random sorted lists drive both devices every step; every merged output and the
// 3-way median are compared with sorts done in the testbench. The testbench also
// counts how often each mechanism of the two networks is exercised and fails if any
// of them never happened:
//   col_interleave  a stage-1 column merge placed a DN value above an UP value
//   row_exchange    a stage-2 row sort reordered a row of the 2-way array
//   updn_tie        an UP value equalled a DN value (tie resolution)
//   disjoint_lists  one list lay entirely above the other
//   s3_swap         a 3-way stage-3 edge-column pair was out of order and exchanged
//   s3_keep         a stage-3 pair was already in order
//   median_early    the 3-way median was final after stage 2
// Combinational: checked 1 ns after each input change (zero-cycle latency).
module tb_loms_top;
  int checks   = 0;
  int failures = 0;

  localparam int NUP = 32;
  localparam int NDN = 32;

  logic [31:0] up_list [NUP];
  logic [31:0] dn_list [NDN];
  logic [31:0] merged2 [NUP+NDN];
  logic [31:0] a_list [7], b_list [7], c_list [7];
  logic [31:0] merged3 [21];
  logic [31:0] median3;

  loms_top dut (
    .up_list(up_list), .dn_list(dn_list), .merged2(merged2),
    .a_list(a_list), .b_list(b_list), .c_list(c_list),
    .merged3(merged3), .median3(median3)
  );

  int n_col_interleave = 0, n_row_exchange = 0, n_updn_tie = 0, n_disjoint = 0;
  int n_s3_swap = 0, n_s3_keep = 0, n_median_early = 0;

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic need(input string what, input int n);
    checks++;
    $display("mechanism %-16s seen %0d times", what, n);
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism %s never exercised", what);
    end
  endtask

  initial begin
    logic [31:0] qu[$], qd[$], q2[$], qa[$], qb[$], qc[$], q3[$];
    for (int it = 0; it < 3000; it++) begin
      int mode;
      mode = it % 4;
      qu.delete(); qd.delete(); qa.delete(); qb.delete(); qc.delete();
      for (int i = 0; i < NUP; i++)
        qu.push_back(mode == 0 ? 32'($urandom_range(20)) :
                     mode == 1 ? $urandom :
                     mode == 2 ? 32'($urandom_range(1000)) + 32'd5000 : 32'($urandom_range(1000)));
      for (int j = 0; j < NDN; j++)
        qd.push_back(mode == 0 ? 32'($urandom_range(20)) :
                     mode == 1 ? $urandom : 32'($urandom_range(1000)) + ((mode == 3) ? 32'd5000 : 32'd0));
      for (int i = 0; i < 7; i++) begin
        qa.push_back(mode[0] ? $urandom : 32'($urandom_range(15)));
        qb.push_back(mode[0] ? $urandom : 32'($urandom_range(15)));
        qc.push_back(mode[0] ? $urandom : 32'($urandom_range(15)));
      end
      qu.sort(); qd.sort(); qa.sort(); qb.sort(); qc.sort();
      for (int i = 0; i < NUP; i++) up_list[i] = qu[i];
      for (int j = 0; j < NDN; j++) dn_list[j] = qd[j];
      for (int i = 0; i < 7; i++) begin
        a_list[i] = qa[i]; b_list[i] = qb[i]; c_list[i] = qc[i];
      end
      q2 = {qu, qd}; q2.sort();
      q3 = {qa, qb, qc}; q3.sort();
      #1;
      for (int k = 0; k < NUP + NDN; k++) check($sformatf("it=%0d merged2[%0d]", it, k), merged2[k], q2[k]);
      for (int k = 0; k < 21; k++)        check($sformatf("it=%0d merged3[%0d]", it, k), merged3[k], q3[k]);
      check($sformatf("it=%0d median3", it), median3, q3[10]);

      // ------------------------------------------------ mechanism counters
      if (qu[0] > qd[NDN-1] || qd[0] > qu[NUP-1]) n_disjoint++;
      begin
        bit tie, inter, exch;
        tie = 0; inter = 0; exch = 0;
        foreach (qu[i]) foreach (qd[j]) if (qu[i] == qd[j]) tie = 1;
        // column c (2 columns): top-down UP values then DN values; a DN value above an UP one
        for (int c = 0; c < 2; c++)
          for (int t = 0; t < 32; t++)
            if (dut.u_two_way.colv[c][t] != up_list[NUP-1-(1-c)-2*t] && t < 16) inter = 1;
        for (int t = 0; t < 32; t++)
          if (dut.u_two_way.colv[1][t] < dut.u_two_way.colv[0][t]) exch = 1;
        if (tie)   n_updn_tie++;
        if (inter) n_col_interleave++;
        if (exch)  n_row_exchange++;
      end
      for (int r = 0; r < 6; r++) begin
        bit [1:0] c;
        c = ((r + 1) % 2 == 0) ? 2'd0 : 2'd2;
        if (dut.u_three_way.s2[r+1][c] < dut.u_three_way.s2[r][c]) n_s3_swap++;
        else n_s3_keep++;
      end
      if (dut.u_three_way.s2[3][1] == q3[10]) n_median_early++;
    end

    need("col_interleave", n_col_interleave);
    need("row_exchange",   n_row_exchange);
    need("updn_tie",       n_updn_tie);
    need("disjoint_lists", n_disjoint);
    need("s3_swap",        n_s3_swap);
    need("s3_keep",        n_s3_keep);
    need("median_early",   n_median_early);
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
