// 64-QAM deinterleaver address datapath.
//
// For 64-QAM (s = 3) the columns are taken in groups of three and each row
// rotates its groups by j mod 3. The address of the bit in row j, column i
// is
//     k = d*i + j        for j mod 3 = 0,
//     k = d*(i-2) + j    for j mod 3 = 1 and i mod 3 = 2,
//     k = d*(i+1) + j    for j mod 3 = 1 and i mod 3 != 2,
//     k = d*(i+2) + j    for j mod 3 = 2 and i mod 3 = 0,
//     k = d*(i-1) + j    for j mod 3 = 2 and i mod 3 != 0.
// These cases are those of the design's floor-free algorithm. Its 64-QAM
// block diagram was not available, so the structure here is this design's
// own, built in the style of the 16-QAM datapath: mod-3 units on i and j,
// adders and subtractors with constants 1 and 2 on the column index, a
// multiplexer per row class picking the column by i mod 3, a multiplexer
// picking the row class by j mod 3, then the multiplier by d and the adder
// of j.
//
// The column count Ncpbs/d must be a multiple of 3 (Ncpbs a multiple of
// 3d); this holds for every 64-QAM depth of IEEE 802.16, which are
// multiples of 288.
//
// Interface: col (i) and row (j) from the shared counters, addr (k) out.
// Combinational, no latency.
module qam64_addr_gen
  import deint_pkg::*;
#(
  parameter int unsigned D       = D_DEFAULT,
  parameter int unsigned NCPBS_W = NCPBS_W_DEFAULT,
  localparam int unsigned COL_W  = col_width(NCPBS_W, D),
  localparam int unsigned ROW_W  = row_width(D)
) (
  input  logic [COL_W-1:0]   col,   // column i
  input  logic [ROW_W-1:0]   row,   // row j
  output logic [NCPBS_W-1:0] addr   // deinterleaver address k
);

  logic [COL_W-1:0] col_p1, col_p2, col_m1, col_m2;
  logic [COL_W-1:0] col_row1, col_row2, col_sel;
  logic [1:0]       col_mod3, row_mod3;

  always_comb begin
    col_mod3 = 2'(col % COL_W'(3));               // i mod 3
    row_mod3 = 2'(row % ROW_W'(3));               // j mod 3
    col_p1   = col + COL_W'(1);
    col_p2   = col + COL_W'(2);
    col_m1   = col - COL_W'(1);
    col_m2   = col - COL_W'(2);
    // j mod 3 = 1: i-2 at i mod 3 = 2, else i+1
    col_row1 = (col_mod3 == 2'd2) ? col_m2 : col_p1;
    // j mod 3 = 2: i+2 at i mod 3 = 0, else i-1
    col_row2 = (col_mod3 == 2'd0) ? col_p2 : col_m1;
    unique case (row_mod3)
      2'd1:    col_sel = col_row1;
      2'd2:    col_sel = col_row2;
      default: col_sel = col;
    endcase
    addr = NCPBS_W'(col_sel) * NCPBS_W'(D) + NCPBS_W'(row);
  end

endmodule
