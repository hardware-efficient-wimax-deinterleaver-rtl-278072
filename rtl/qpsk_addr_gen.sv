// QPSK deinterleaver address datapath.
//
// For QPSK (s = 1) the second permutation of IEEE 802.16 leaves each bit in
// place, and the address of the bit in row j, column i of the block is
//     k = d*i + j.
// The datapath is the multiplier by d and the adder of the QPSK block
// diagram; with d = 16 the product is a shift and the sum a concatenation.
//
// Interface: col (i) and row (j) from the shared counters, addr (k) out.
// Combinational, no latency.
module qpsk_addr_gen
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

  logic [NCPBS_W-1:0] scaled;

  always_comb begin
    scaled = NCPBS_W'(col) * NCPBS_W'(D);  // multiplier (x d)
    addr   = scaled + NCPBS_W'(row);       // adder (+ j)
  end

endmodule
