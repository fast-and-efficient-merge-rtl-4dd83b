// tb_s2ms: self-checking testbench for the single-stage 2-way merge sorter.
//
// Instantiates s2ms in several shapes: UP-2/DN-2 in both LUT styles (the literal
// four-equation form), the default UP-16/DN-16, and unequal, odd sizes. Each instance
// gets random sorted lists (narrow value ranges to force ties, wide ranges, and lists
// lying entirely above or below each other) and its output is compared with a sort of
// the concatenated inputs done in the testbench. The merger is combinational, so the
// output is checked 1 ns after the inputs change (zero-cycle latency).
module tb_s2ms;
  import loms_pkg::*;

  int checks   = 0;
  int failures = 0;
  int done     = 0;

  localparam int NCFG = 7;
  localparam int CFG_UP [NCFG] = '{2, 2, 16, 3, 1, 7, 5};
  localparam int CFG_DN [NCFG] = '{2, 2, 16, 5, 4, 1, 8};
  localparam lut_style_e CFG_ST [NCFG] =
    '{LUT_2INS, LUT_4INS, LUT_2INS, LUT_2INS, LUT_2INS, LUT_2INS, LUT_2INS};

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    localparam int NU = CFG_UP[g];
    localparam int ND = CFG_DN[g];
    logic [31:0] up  [NU];
    logic [31:0] dn  [ND];
    logic [31:0] out [NU+ND];

    s2ms #(.W(32), .NUP(NU), .NDN(ND), .LUT_STYLE(CFG_ST[g])) dut (
      .up(up), .dn(dn), .merged(out)
    );

    initial begin
      logic [31:0] qu[$], qd[$], qa[$];
      int unsigned range, offu, offd;
      for (int it = 0; it < 400; it++) begin
        qu.delete(); qd.delete();
        case (it % 4)
          0: begin range = 4;          offu = 0;    offd = 0;    end
          1: begin range = 32'hFFFF_FFFF; offu = 0; offd = 0;    end
          2: begin range = 100;        offu = 1000; offd = 0;    end  // UP all above
          default: begin range = 100;  offu = 0;    offd = 1000; end  // DN all above
        endcase
        for (int i = 0; i < NU; i++) qu.push_back(offu + ((range == 32'hFFFF_FFFF) ? $urandom : $urandom_range(range - 1)));
        for (int j = 0; j < ND; j++) qd.push_back(offd + ((range == 32'hFFFF_FFFF) ? $urandom : $urandom_range(range - 1)));
        qu.sort(); qd.sort();
        for (int i = 0; i < NU; i++) up[i] = qu[i];
        for (int j = 0; j < ND; j++) dn[j] = qd[j];
        qa = {qu, qd};
        qa.sort();
        #1;
        for (int k = 0; k < NU + ND; k++) begin
          checks++;
          if (out[k] !== qa[k]) begin
            failures++;
            if (failures < 10)
              $display("FAIL s2ms UP-%0d/DN-%0d it=%0d out[%0d]=%0d expected %0d",
                       NU, ND, it, k, out[k], qa[k]);
          end
        end
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
