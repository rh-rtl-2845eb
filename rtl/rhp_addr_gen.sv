// MAC_AB address generator.
//
// Maps the index k of a MAC_AB within a GEMV pass to the bank address it
// reads. The weights of a pass are laid out from column 0 of base_row; the
// k-th MAC reads linear column k*stride, that is row base_row + (k*stride)/32
// and column (k*stride) mod 32, since a DRAM row holds 32 columns.
//
// With the host-style interleaving stride of 64 columns every MAC lands two
// rows further on and no two MACs share a row. RH+ programs a stride of 1,
// so 32 consecutive MACs walk columns C0..C31 of one row before the next
// row is needed. The stride is a run-time input so that the same datapath
// serves any layout; the mapping itself follows the paper, the choice of a
// programmable field is this design's.
//
// Purely combinational: row and col follow mac_idx, base_row and stride in
// the same cycle.
module rhp_addr_gen
  import pim_pkg::*;
#(
  parameter int unsigned COLS = COLS_PER_ROW   // columns per row, power of two
) (
  input  row_t                base_row,
  input  logic [STRIDE_W-1:0] stride,
  input  logic [MACN_W-1:0]   mac_idx,
  output row_t                row,
  output col_t                col
);
  localparam int unsigned LIN_W = MACN_W + STRIDE_W;
  localparam int unsigned CW    = $clog2(COLS);

  logic [LIN_W-1:0] linear;

  always_comb begin
    linear = LIN_W'(mac_idx) * LIN_W'(stride);
    row    = base_row + row_t'(linear >> CW);
    col    = col_t'(linear & LIN_W'(COLS - 1));
  end

endmodule
