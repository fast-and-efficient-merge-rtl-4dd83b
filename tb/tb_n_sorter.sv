// tb_n_sorter: self-checking testbench for the single-stage N-sorter.
//
// Instantiates n_sorter for N = 2, 3, 7 and 8 (the row sorters of 2-, 3- and 8-column
// arrays and the 7-value column sorter of the 3-way device). Random unsorted inputs,
// drawn from narrow ranges (many ties) and the full 32-bit range, are applied and the
// output is compared with a sort done in the testbench. Combinational: checked 1 ns
// after each input change.
module tb_n_sorter;
  int checks   = 0;
  int failures = 0;
  int done     = 0;

  localparam int NCFG = 4;
  localparam int CFG_N [NCFG] = '{2, 3, 7, 8};

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    localparam int N = CFG_N[g];
    logic [31:0] din  [N];
    logic [31:0] dout [N];

    n_sorter #(.W(32), .N(N)) dut (.din(din), .dout(dout));

    initial begin
      logic [31:0] q[$];
      for (int it = 0; it < 500; it++) begin
        q.delete();
        for (int i = 0; i < N; i++) begin
          din[i] = (it % 2 == 0) ? 32'($urandom_range(3)) : $urandom;
          q.push_back(din[i]);
        end
        q.sort();
        #1;
        for (int k = 0; k < N; k++) begin
          checks++;
          if (dout[k] !== q[k]) begin
            failures++;
            if (failures < 10)
              $display("FAIL n_sorter N=%0d it=%0d dout[%0d]=%0d expected %0d",
                       N, it, k, dout[k], q[k]);
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
