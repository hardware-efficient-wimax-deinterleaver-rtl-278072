// Divider and minus-one subtractor at the input of the address generator.
//
// The interleaving depth Ncpbs is divided by the number of rows d, giving
// the number of columns Ncpbs/d of the block deinterleaver, and one is
// subtracted, giving the last column index that the column comparator
// watches. Because this unit works from Ncpbs itself rather than from a
// table of allowed depths, any depth that is a multiple of d is accepted.
// One instance is shared by the QPSK, 16-QAM and 64-QAM generators.
//
// The divider, the subtractor with constant 1 and their order follow the
// block diagrams of the design. With d a power of two the division is a
// right shift. Ncpbs is assumed to be a non-zero multiple of d (for 16-QAM a
// multiple of 2d, for 64-QAM of 3d); other values give a truncated column
// count.
//
// Interface: ncpbs in, col_last out. Purely combinational, no latency.
module ncpbs_div_sub
  import deint_pkg::*;
#(
  parameter int unsigned D       = D_DEFAULT,
  parameter int unsigned NCPBS_W = NCPBS_W_DEFAULT,
  localparam int unsigned COL_W  = col_width(NCPBS_W, D)
) (
  input  logic [NCPBS_W-1:0] ncpbs,     // interleaving depth Ncpbs
  output logic [COL_W-1:0]   col_last   // Ncpbs/d - 1
);

  logic [NCPBS_W-1:0] n_cols;

  always_comb begin
    n_cols   = ncpbs / NCPBS_W'(D);          // divider
    col_last = COL_W'(n_cols - NCPBS_W'(1)); // subtractor (minus one)
  end

endmodule
