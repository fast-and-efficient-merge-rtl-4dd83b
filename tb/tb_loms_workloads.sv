// tb_loms_workloads: runs every 2-way LOMS size of the characterisation matrix, and the
// 3-way device at 8 bits, through random sorted inputs.
//
// 2-way sizes (equal power-of-2 lists, N outputs; column sorter size in brackets):
//   2 columns: N = 8, 16, 32, 64             (2_2 ... 16_16)
//   4 columns: N = 16, 32, 64                (2_2 ... 8_8)
//   8 columns: N = 32, 64, 128, 256          (2_2 ... 16_16)
// all with 32-bit values; the 2-column N = 8 and 64 devices and the 3c_7r device with
// 8-bit values; and the 2-column N = 8 device with 4-input-bit LUT packing. The 2- and
// 4-column devices with 128 and 256 outputs (32_32 and 64_64 column sorters) are left
// out only because the simulator needs about half an hour to build them. Each output is
// compared with a sort of the concatenated inputs done in the testbench.
module tb_loms_workloads;
  import loms_pkg::*;

  int checks   = 0;
  int failures = 0;
  int done     = 0;

  localparam int NCFG = 15;
  //                                 2col            4col        8col          8-bit
  localparam int CFG_L   [NCFG] = '{4, 8, 16, 32,  8, 16, 32,  16, 32, 64, 128,  4, 32,  4,  4};
  localparam int CFG_COL [NCFG] = '{2, 2,  2,  2,  4,  4,  4,   8,  8,  8,   8,  2,  2,  2,  2};
  localparam int CFG_W   [NCFG] = '{32,32,32, 32, 32, 32, 32,  32, 32, 32,  32,  8,  8, 32, 32};
  localparam lut_style_e CFG_ST [NCFG] = '{default: LUT_2INS};
  localparam int ITERS = 40;

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  for (genvar g = 0; g < NCFG - 2; g++) begin : g_cfg
    localparam int L  = CFG_L[g];
    localparam int C  = CFG_COL[g];
    localparam int WD = CFG_W[g];
    logic [WD-1:0] up  [L];
    logic [WD-1:0] dn  [L];
    logic [WD-1:0] out [2*L];

    loms_2way #(.W(WD), .NUP(L), .NDN(L), .NCOL(C), .LUT_STYLE(CFG_ST[g])) dut (
      .up_list(up), .dn_list(dn), .merged(out)
    );

    initial begin
      logic [31:0] qu[$], qd[$], qa[$];
      for (int it = 0; it < ITERS; it++) begin
        qu.delete(); qd.delete();
        for (int i = 0; i < L; i++) begin
          qu.push_back((it % 2 == 0) ? 32'($urandom_range(3 * L)) : ($urandom >> (32 - WD)));
          qd.push_back((it % 2 == 0) ? 32'($urandom_range(3 * L)) : ($urandom >> (32 - WD)));
        end
        if (WD < 32) begin
          foreach (qu[i]) qu[i] = qu[i] & ((32'd1 << WD) - 1);
          foreach (qd[i]) qd[i] = qd[i] & ((32'd1 << WD) - 1);
        end
        qu.sort(); qd.sort();
        for (int i = 0; i < L; i++) begin
          up[i] = WD'(qu[i]);
          dn[i] = WD'(qd[i]);
        end
        qa = {qu, qd};
        qa.sort();
        #1;
        for (int k = 0; k < 2 * L; k++)
          check($sformatf("%0dcol UP-%0d/DN-%0d W=%0d out[%0d]", C, L, L, WD, k), 32'(out[k]), qa[k]);
      end
      done++;
    end
  end

  // 2-column UP-4/DN-4 with the 4-input-bit packing of the 2_2 column sorters
  begin : g_4ins
    logic [31:0] up [4], dn [4], out [8];
    loms_2way #(.W(32), .NUP(4), .NDN(4), .NCOL(2), .LUT_STYLE(LUT_4INS)) dut (
      .up_list(up), .dn_list(dn), .merged(out)
    );
    initial begin
      logic [31:0] qu[$], qd[$], qa[$];
      for (int it = 0; it < 400; it++) begin
        qu.delete(); qd.delete();
        for (int i = 0; i < 4; i++) begin
          qu.push_back(32'($urandom_range(6)));
          qd.push_back(32'($urandom_range(6)));
        end
        qu.sort(); qd.sort();
        for (int i = 0; i < 4; i++) begin up[i] = qu[i]; dn[i] = qd[i]; end
        qa = {qu, qd}; qa.sort();
        #1;
        for (int k = 0; k < 8; k++) check($sformatf("4ins UP-4/DN-4 out[%0d]", k), out[k], qa[k]);
      end
      done++;
    end
  end

  // 3c_7r full merge and median with 8-bit values
  begin : g_3way8
    logic [7:0] a [7], b [7], c [7], out [21], med;
    loms_3way #(.W(8)) dut (.a_list(a), .b_list(b), .c_list(c), .merged(out), .median(med));
    initial begin
      logic [31:0] qa[$], qb[$], qc[$], q[$];
      for (int it = 0; it < 400; it++) begin
        qa.delete(); qb.delete(); qc.delete();
        for (int i = 0; i < 7; i++) begin
          qa.push_back(32'($urandom_range(255)));
          qb.push_back(32'($urandom_range(255)));
          qc.push_back(32'($urandom_range(255)));
        end
        qa.sort(); qb.sort(); qc.sort();
        for (int i = 0; i < 7; i++) begin a[i] = 8'(qa[i]); b[i] = 8'(qb[i]); c[i] = 8'(qc[i]); end
        q = {qa, qb, qc}; q.sort();
        #1;
        for (int k = 0; k < 21; k++) check($sformatf("3c_7r W=8 out[%0d]", k), 32'(out[k]), q[k]);
        check("3c_7r W=8 median", 32'(med), q[10]);
      end
      done++;
    end
  end

  initial begin
    wait (done == NCFG);
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
