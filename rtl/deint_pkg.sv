// Shared constants and types of the WiMAX deinterleaver address generator.
//
// The number of block-deinterleaver rows d defaults to 16, the value chosen
// for this design because it is a power of two, so that both the division
// Ncpbs/d and the multiplication by d reduce to wiring. IEEE 802.16 also
// allows d = 12; every module takes d as a parameter. The width of the
// interleaving depth Ncpbs (12 bits, depths up to 4080) is this design's own
// choice.
package deint_pkg;

  localparam int unsigned D_DEFAULT       = 16;
  localparam int unsigned NCPBS_W_DEFAULT = 12;

  // Modulation select. The encoding is this design's own choice.
  typedef enum logic [1:0] {
    MOD_QPSK  = 2'd0,
    MOD_16QAM = 2'd1,
    MOD_64QAM = 2'd2
  } mod_e;

  // Width of a column index for depths below 2**ncpbs_w with d rows.
  function automatic int unsigned col_width(int unsigned ncpbs_w, int unsigned d);
    return $clog2((2 ** ncpbs_w) / d);
  endfunction

  // Width of a row index (0 .. d-1).
  function automatic int unsigned row_width(int unsigned d);
    return (d > 1) ? $clog2(d) : 1;
  endfunction

endpackage
