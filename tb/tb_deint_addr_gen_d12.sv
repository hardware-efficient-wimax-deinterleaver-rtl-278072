// Testbench of the complete address generator built for d = 12 rows, the
// other row count IEEE 802.16 allows. With d = 12 the divider and the
// multiplier are no longer shifts. For each modulation and several depths
// (multiples of 12, 24 and 36) it runs one block with en held high and
// compares every address with the IEEE 802.16 deinterleaver formula, and
// checks that the block takes Ncpbs clocks.
module tb_deint_addr_gen_d12;
  import deint_pkg::*;
  import deint_ref_pkg::*;

  localparam int unsigned D = 12;

  int checks = 0, failures = 0;

  logic        clk = 0, rst_n = 0, en = 0;
  mod_e        mod_sel = MOD_QPSK;
  logic [11:0] ncpbs = 12'd96;
  logic [11:0] addr;
  logic [3:0]  row;
  logic [8:0]  col;
  logic        block_last;

  wimax_deint_addr_gen #(.D(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    int unsigned depths[3][4] = '{'{96, 384, 12, 4080}, '{192, 768, 24, 4080}, '{288, 1152, 36, 4068}};
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int m = 0; m < 3; m++)
      foreach (depths[m][x]) begin
        int unsigned n_bits, cycles;
        mod_sel = mod_e'(m);
        ncpbs   = 12'(depths[m][x]);
        n_bits  = depths[m][x];
        cycles  = 0;
        en      = 1;
        for (int unsigned n = 0; n < n_bits; n++) begin
          #1;
          check(addr == 12'(ref_addr(m, n_bits, D, n)),
                $sformatf("d=12 mod %0d ncpbs %0d bit %0d: addr %0d expected %0d",
                          m, n_bits, n, addr, ref_addr(m, n_bits, D, n)));
          check(block_last == (n == n_bits - 1), "block_last");
          @(negedge clk);
          cycles++;
        end
        en = 0;
        check(cycles == n_bits, "block length");
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
