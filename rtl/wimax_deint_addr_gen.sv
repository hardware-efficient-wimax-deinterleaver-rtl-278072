// WiMAX (IEEE 802.16) deinterleaver address generator for any interleaving
// depth, QPSK, 16-QAM and 64-QAM.
//
// The deinterleaver writes the n-th received bit of a block of Ncpbs bits to
// address k(n) (or reads it from there), where k is the inverse of the two
// IEEE 802.16 interleaver permutations. The standard's formula needs floor
// divisions by Ncpbs; this generator avoids them. It views the block as
// d = 16 rows of Ncpbs/d columns, counts the column i and row j of the
// current bit, and forms k from i and j with small per-modulation rules:
// k = d*i' + j, where i' is i itself (QPSK), i with neighbouring columns
// swapped on odd rows (16-QAM), or i rotated inside groups of three columns
// by j mod 3 (64-QAM).
//
// Structure: one divider/subtractor (Ncpbs/d - 1) and one pair of row and
// column counters are shared by the three modulation datapaths, whose
// addresses are chosen by a multiplexer on mod_sel. Sharing the divider and
// subtractor, and accepting Ncpbs as a number rather than selecting from a
// fixed list, follows the design; how the three datapaths are combined (the
// shared counters and the output multiplexer) is this design's own reading,
// as the drawing of the complete generator was not available.
//
// Interface and timing: after reset the counters stand at i = j = 0 and
// addr shows k(0). Each clock with en high advances to the next bit, so one
// address is produced per clock and a block takes Ncpbs enabled clocks.
// block_last marks the last address of a block; the next block starts on
// the following clock. mod_sel and ncpbs must be held while a block is in
// progress and may change when block_last is accepted (or during reset).
// Ncpbs must be a multiple of d, of 2d for 16-QAM and of 3d for 64-QAM.
// addr is combinational from the counter registers. The counter's col_wrap
// output is not needed here and is left open.
module wimax_deint_addr_gen
  import deint_pkg::*;
#(
  parameter int unsigned D       = D_DEFAULT,
  parameter int unsigned NCPBS_W = NCPBS_W_DEFAULT,
  localparam int unsigned COL_W  = col_width(NCPBS_W, D),
  localparam int unsigned ROW_W  = row_width(D)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               en,          // advance to the next bit
  input  mod_e               mod_sel,     // modulation of the block
  input  logic [NCPBS_W-1:0] ncpbs,       // interleaving depth Ncpbs
  output logic [NCPBS_W-1:0] addr,        // deinterleaver address k
  output logic [ROW_W-1:0]   row,         // current row j
  output logic [COL_W-1:0]   col,         // current column i
  output logic               block_last   // addr is the last of the block
);

  logic [COL_W-1:0]   col_last;
  logic [NCPBS_W-1:0] addr_qpsk, addr_qam16, addr_qam64;

  ncpbs_div_sub #(.D(D), .NCPBS_W(NCPBS_W)) u_div_sub (
    .ncpbs    (ncpbs),
    .col_last (col_last)
  );

  row_col_counter #(.D(D), .NCPBS_W(NCPBS_W)) u_counter (
    .clk        (clk),
    .rst_n      (rst_n),
    .en         (en),
    .col_last   (col_last),
    .col        (col),
    .row        (row),
    .col_wrap   (),
    .block_last (block_last)
  );

  qpsk_addr_gen #(.D(D), .NCPBS_W(NCPBS_W)) u_qpsk (
    .col  (col),
    .row  (row),
    .addr (addr_qpsk)
  );

  qam16_addr_gen #(.D(D), .NCPBS_W(NCPBS_W)) u_qam16 (
    .col  (col),
    .row  (row),
    .addr (addr_qam16)
  );

  qam64_addr_gen #(.D(D), .NCPBS_W(NCPBS_W)) u_qam64 (
    .col  (col),
    .row  (row),
    .addr (addr_qam64)
  );

  // Modulation multiplexer.
  always_comb begin
    unique case (mod_sel)
      MOD_16QAM: addr = addr_qam16;
      MOD_64QAM: addr = addr_qam64;
      default:   addr = addr_qpsk;
    endcase
  end

  // Every address lies inside the block when Ncpbs suits the modulation.
  a_addr_in_block : assert property (
    @(posedge clk) disable iff (!rst_n) en |-> (addr < ncpbs)
  ) else $error("address %0d outside block of %0d bits", addr, ncpbs);

  // The configuration is held between block boundaries.
  a_config_held : assert property (
    @(posedge clk) disable iff (!rst_n)
      (en && !block_last) |=> ($stable(mod_sel) && $stable(ncpbs))
  ) else $error("mod_sel or ncpbs changed inside a block");

endmodule
