// Testbench of the 64-QAM address datapath. For each depth it applies every
// (row j, column i) of the block and compares the address with the IEEE
// 802.16 deinterleaver formula evaluated for bit n = j*Ncpbs/d + i, checks
// that the block's addresses form a permutation of 0..Ncpbs-1, and checks
// the first 5 x 5 addresses printed for this modulation in the design's
// address table.
module tb_qam64_addr_gen;
  import deint_pkg::*;
  import deint_ref_pkg::*;

  int checks = 0, failures = 0;

  logic [7:0]  col;
  logic [3:0]  row;
  logic [11:0] addr;

  qam64_addr_gen dut (.col(col), .row(row), .addr(addr));

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // First five rows and columns of the printed table (row-major).
  int unsigned table5[25] = '{0,16,32,48,64, 17,33,1,65,81, 34,2,18,82,50, 3,19,35,51,67, 20,36,4,68,84};

  initial begin
    int unsigned depths[] = '{576, 288, 864, 1152, 2304, 48, 96, 4032};
    bit seen[4096];
    for (int unsigned r = 0; r < 5; r++)
      for (int unsigned c = 0; c < 5; c++) begin
        row = 4'(r);
        col = 8'(c);
        #1;
        checks++;
        if (addr != 12'(table5[5 * r + c])) begin
          failures++;
          $display("FAIL table j=%0d i=%0d addr=%0d expected %0d", r, c, addr, table5[5 * r + c]);
        end
      end
    foreach (depths[x]) begin
      int unsigned n_cols;
      n_cols = depths[x] / 16;
      foreach (seen[a]) seen[a] = 0;
      for (int unsigned r = 0; r < 16; r++)
        for (int unsigned c = 0; c < n_cols; c++) begin
          int unsigned expected;
          row = 4'(r);
          col = 8'(c);
          #1;
          expected = ref_addr(2, depths[x], 16, r * n_cols + c);
          checks++;
          if (addr != 12'(expected)) begin
            failures++;
            if (failures < 20)
              $display("FAIL ncpbs=%0d j=%0d i=%0d addr=%0d expected %0d",
                        depths[x], r, c, addr, expected);
          end
          if (addr < 12'(depths[x])) seen[addr] = 1;
        end
      checks++;
      for (int unsigned a = 0; a < depths[x]; a++)
        if (!seen[a]) begin
          failures++;
          $display("FAIL ncpbs=%0d address %0d never produced", depths[x], a);
          break;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
