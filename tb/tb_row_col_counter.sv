// Testbench of the row/column counters: for several column counts it runs
// two whole blocks with random gaps in en and compares i, j and block_last
// with a position count kept here. A block of d*(col_last+1) positions must
// take exactly that many enabled clocks.
module tb_row_col_counter;
  import deint_pkg::*;

  int checks = 0, failures = 0;

  logic       clk = 0, rst_n = 0, en = 0;
  logic [7:0] col_last, col;
  logic [3:0] row;
  logic       col_wrap, block_last;

  row_col_counter dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    int unsigned cols[5] = '{6, 12, 36, 1, 255};
    col_last = 8'd5;
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (cols[c]) begin
      int unsigned n_pos, pos, enabled;
      col_last = 8'(cols[c] - 1);
      n_pos = 16 * cols[c];
      pos = 0;
      enabled = 0;
      // two blocks in a row, random stalls
      while (pos < 2 * n_pos) begin
        en = ($urandom_range(0, 3) != 0);
        #1;
        check(col == 8'((pos % n_pos) % cols[c]), $sformatf("col at pos %0d: %0d row %0d last %0d", pos, col, row, col_last));
        check(row == 4'((pos % n_pos) / cols[c]), $sformatf("row at pos %0d", pos));
        check(block_last == ((pos % n_pos) == n_pos - 1), $sformatf("block_last at pos %0d", pos));
        check(col_wrap == ((pos % cols[c]) == cols[c] - 1), $sformatf("col_wrap at pos %0d", pos));
        @(negedge clk);
        if (en) begin
          pos++;
          enabled++;
        end
      end
      // exactly 2 blocks took 2*d*cols enabled clocks and we are back at 0
      #1;
      check(enabled == 2 * n_pos && col == 0 && row == 0, "block length");
      en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
