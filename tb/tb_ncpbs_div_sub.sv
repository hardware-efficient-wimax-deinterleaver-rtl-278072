// Testbench of the divider/minus-one unit: every multiple of d in range,
// plus random ones, compared with Ncpbs/d - 1 worked out here. Also checks
// the d = 12 variant.
module tb_ncpbs_div_sub;
  import deint_pkg::*;

  int checks = 0, failures = 0;

  logic [11:0] ncpbs;
  logic [7:0]  col_last;
  logic [11:0] ncpbs12;
  logic [8:0]  col_last12;

  ncpbs_div_sub dut (.ncpbs(ncpbs), .col_last(col_last));
  ncpbs_div_sub #(.D(12), .NCPBS_W(12)) dut12 (.ncpbs(ncpbs12), .col_last(col_last12));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int unsigned c = 1; c <= 255; c++) begin
      ncpbs = 12'(16 * c);
      ncpbs12 = 12'(12 * c);
      #1;
      checks++;
      if (col_last !== 8'(c - 1)) begin
        failures++;
        $display("FAIL d=16 ncpbs=%0d col_last=%0d expected %0d", ncpbs, col_last, c - 1);
      end
      checks++;
      if (col_last12 !== 9'(c - 1)) begin
        failures++;
        $display("FAIL d=12 ncpbs=%0d col_last=%0d expected %0d", ncpbs12, col_last12, c - 1);
      end
    end
    // Depths used in the tables of the design: 96, 192, 576.
    ncpbs = 12'd96;  #1; checks++; if (col_last !== 8'd5)  failures++;
    ncpbs = 12'd192; #1; checks++; if (col_last !== 8'd11) failures++;
    ncpbs = 12'd576; #1; checks++; if (col_last !== 8'd35) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
