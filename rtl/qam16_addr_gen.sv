// 16-QAM deinterleaver address datapath.
//
// For 16-QAM (s = 2) the bits of every odd row are swapped in pairs of
// columns. The address of the bit in row j, column i is
//     k = d*i + j        for even j,
//     k = d*(i+1) + j    for odd j and even i,
//     k = d*(i-1) + j    for odd j and odd i.
// The structure follows the 16-QAM block diagram: an adder and a
// subtractor with constant 1 on the column index, a first multiplexer
// choosing i+1 (input 0) or i-1 (input 1) by i mod 2, a second multiplexer
// choosing i (input 0) or that result (input 1) by j mod 2, then the
// multiplier by d and the adder of j.
//
// The column count Ncpbs/d must be even (Ncpbs a multiple of 2d) so that
// i+1 never leaves the row; this holds for every 16-QAM depth of IEEE
// 802.16.
//
// Interface: col (i) and row (j) from the shared counters, addr (k) out.
// Combinational, no latency.
module qam16_addr_gen
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

  logic [COL_W-1:0] col_inc, col_dec, col_odd_row, col_sel;
  logic             col_mod2, row_mod2;

  always_comb begin
    col_inc     = col + COL_W'(1);                 // adder, constant 1
    col_dec     = col - COL_W'(1);                 // subtractor, constant 1
    col_mod2    = col[0];                          // i mod 2
    row_mod2    = row[0];                          // j mod 2
    col_odd_row = col_mod2 ? col_dec : col_inc;    // first multiplexer
    col_sel     = row_mod2 ? col_odd_row : col;    // second multiplexer
    addr        = NCPBS_W'(col_sel) * NCPBS_W'(D) + NCPBS_W'(row);
  end

endmodule
