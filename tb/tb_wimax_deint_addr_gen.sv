// End-to-end testbench of the deinterleaver address generator at its
// default parameters (d = 16, 12-bit Ncpbs).
//
// For a list of configurations (the three depths of the design's address
// tables, standard WiMAX depths and random legal depths for each
// modulation) it runs two blocks per configuration. For every bit it
// compares addr with the IEEE 802.16 deinterleaver formula and checks
// block_last. It also deinterleaves real data: random coded bits are passed
// through the IEEE 802.16 interleaver, and each received bit n is written to
// address addr; the result must equal the original bits. Timing: with en
// held high a block of Ncpbs bits must take exactly Ncpbs clocks; stalls
// (en low) must freeze the address.
//
// Mechanisms counted, each of which must occur: modulation switch, depth
// switch, stall, column wrap, row step, block wrap, and each modulation.
module tb_wimax_deint_addr_gen;
  import deint_pkg::*;
  import deint_ref_pkg::*;

  int checks = 0, failures = 0;

  logic        clk = 0, rst_n = 0, en = 0;
  mod_e        mod_sel = MOD_QPSK;
  logic [11:0] ncpbs = 12'd96;
  logic [11:0] addr;
  logic [3:0]  row;
  logic [7:0]  col;
  logic        block_last;

  wimax_deint_addr_gen dut (.*);

  always #5 clk = ~clk;

  int unsigned n_mod_switch = 0, n_depth_switch = 0, n_stall = 0;
  int unsigned n_col_wrap = 0, n_row_step = 0, n_block_wrap = 0;
  int unsigned n_mod_used[3] = '{0, 0, 0};

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
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

  // Run one block of the current configuration. stall_pct: chance of en low.
  task automatic run_block(int unsigned stall_pct);
    int unsigned m, n_bits, n, cycles;
    bit data[4096];
    bit rx[4096];
    bit out[4096];
    m      = int'(mod_sel);
    n_bits = int'(ncpbs);
    // transmitter side: random coded bits through the interleaver
    for (int unsigned k = 0; k < n_bits; k++) begin
      data[k] = 1'($urandom);
      rx[ref_intlv(m, n_bits, 16, k)] = data[k];
    end
    n = 0;
    cycles = 0;
    while (n < n_bits) begin
      en = ($urandom_range(0, 99) >= stall_pct);
      #1;
      check(addr == 12'(ref_addr(m, n_bits, 16, n)),
            $sformatf("mod %0d ncpbs %0d bit %0d: addr %0d expected %0d",
                      m, n_bits, n, addr, ref_addr(m, n_bits, 16, n)));
      check(block_last == (n == n_bits - 1), $sformatf("block_last at bit %0d", n));
      if (en) begin
        out[addr] = rx[n];
        if (col == 8'(n_bits / 16 - 1)) n_col_wrap++;
        if (col == 8'(n_bits / 16 - 1) && row != 4'd15) n_row_step++;
        if (block_last) n_block_wrap++;
      end else begin
        n_stall++;
      end
      @(negedge clk);
      cycles++;
      if (en) n++;
      else check(addr == 12'(ref_addr(m, n_bits, 16, n)), "address held in stall");
    end
    if (stall_pct == 0)
      check(cycles == n_bits, $sformatf("block of %0d bits took %0d clocks", n_bits, cycles));
    for (int unsigned k = 0; k < n_bits; k++)
      check(out[k] == data[k], $sformatf("deinterleaved bit %0d of mod %0d ncpbs %0d", k, m, n_bits));
    n_mod_used[m]++;
    en = 0;
  endtask

  task automatic configure(mod_e new_mod, int unsigned new_ncpbs);
    if (new_mod != mod_sel) n_mod_switch++;
    if (12'(new_ncpbs) != ncpbs) n_depth_switch++;
    mod_sel = new_mod;
    ncpbs   = 12'(new_ncpbs);
    #1;
    check(row == 0 && col == 0 && addr == 0, "new block starts at address 0");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // Depths of the printed address tables, continuous en.
    configure(MOD_QPSK, 96);    run_block(0);  run_block(20);
    configure(MOD_16QAM, 192);  run_block(0);  run_block(20);
    configure(MOD_64QAM, 576);  run_block(0);  run_block(20);
    // Standard depths (multiples of 96, 192 and 288).
    configure(MOD_QPSK, 768);   run_block(10);
    configure(MOD_16QAM, 1536); run_block(10);
    configure(MOD_64QAM, 2304); run_block(10);
    // Random interleaving depths: multiples of d, 2d and 3d.
    for (int r = 0; r < 12; r++) begin
      mod_e mm;
      int unsigned unit, depth;
      mm    = mod_e'(r % 3);
      unit  = 16 * ref_s(r % 3);
      depth = unit * $urandom_range(1, 4095 / unit);
      configure(mm, depth);
      run_block(5);
    end
    $display("mechanisms: mod_switch=%0d depth_switch=%0d stall=%0d col_wrap=%0d row_step=%0d block_wrap=%0d qpsk=%0d qam16=%0d qam64=%0d",
             n_mod_switch, n_depth_switch, n_stall, n_col_wrap, n_row_step, n_block_wrap,
             n_mod_used[0], n_mod_used[1], n_mod_used[2]);
    check(n_mod_switch > 0, "modulation switch never happened");
    check(n_depth_switch > 0, "depth switch never happened");
    check(n_stall > 0, "stall never happened");
    check(n_col_wrap > 0, "column wrap never happened");
    check(n_row_step > 0, "row step never happened");
    check(n_block_wrap > 0, "block wrap never happened");
    foreach (n_mod_used[i]) check(n_mod_used[i] > 0, "a modulation was never used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
