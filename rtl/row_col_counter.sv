// Row and column counters of the block deinterleaver, each with the
// comparator that resets it.
//
// The deinterleaver block of Ncpbs bits is seen as d rows of Ncpbs/d
// columns. The column counter i runs 0 .. col_last and the row counter j
// runs 0 .. d-1. Each counter has a comparator against its last value
// (col_last from the shared divider/subtractor, d-1 for the rows) whose
// match resets the counter to zero on the next clock.
//
// The order of counting is this design's choice: the column counter
// advances on every enabled clock and the row counter advances only when
// the column counter wraps. This is the order in which the bits of a block
// arrive, so that address n of the block (n = j*Ncpbs/d + i) is produced on
// the n-th enabled clock, as the IEEE 802.16 deinterleaver equations
// require. After the last address of a block both counters return to zero
// and the next block follows without a gap.
//
// Interface: en advances the counters; block_last is high while the
// counters hold the last position (j = d-1, i = col_last). Registered
// counters, asynchronous active-low reset; col_last must stay constant
// within a block.
module row_col_counter
  import deint_pkg::*;
#(
  parameter int unsigned D       = D_DEFAULT,
  parameter int unsigned NCPBS_W = NCPBS_W_DEFAULT,
  localparam int unsigned COL_W  = col_width(NCPBS_W, D),
  localparam int unsigned ROW_W  = row_width(D)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,          // advance by one position
  input  logic [COL_W-1:0] col_last,    // Ncpbs/d - 1
  output logic [COL_W-1:0] col,         // column counter i
  output logic [ROW_W-1:0] row,         // row counter j
  output logic             col_wrap,    // column comparator match (i = col_last)
  output logic             block_last   // last position of the block
);

  logic row_wrap;

  // Comparators.
  always_comb begin
    col_wrap   = (col == col_last);
    row_wrap   = (row == ROW_W'(D - 1));
    block_last = col_wrap && row_wrap;
  end

  // Column counter: reset by its comparator.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      col <= '0;
    else if (en)
      col <= col_wrap ? '0 : col + COL_W'(1);
  end

  // Row counter: steps once per row of columns, reset by its comparator.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      row <= '0;
    else if (en && col_wrap)
      row <= row_wrap ? '0 : row + ROW_W'(1);
  end

endmodule
