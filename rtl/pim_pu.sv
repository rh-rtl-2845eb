// Per-bank processing unit (PU).
//
// On every MAC_AB the PU takes one column of weights from its bank's row
// buffer and the matching column of the input vector from the GEMV buffer,
// multiplies them lane by lane, reduces the LANES products in a binary adder
// tree and adds the sum to its Result register. The structure (lane
// multipliers, adder tree, Result register fed back into the accumulation)
// is the PU of the HBM3-PIM bank; the number format is this design's choice:
// signed ELEM_W-bit integers, exact products and an ACC_W-bit accumulator.
//
// Timing: mac_en, w and x are sampled at the rising edge; result shows the
// new sum one cycle later. clear zeroes the Result register and wins over
// mac_en. The whole reduction is one combinational stage, which is ample at
// the nCCDAB spacing (at least 4 cycles) of MAC_AB commands.
module pim_pu
  import pim_pkg::*;
#(
  parameter int unsigned N_LANES = LANES,
  parameter int unsigned EW      = ELEM_W,
  parameter int unsigned AW      = ACC_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clear,
  input  logic                      mac_en,
  input  logic [N_LANES*EW-1:0]     w,       // weights, lane i in bits [i*EW +: EW]
  input  logic [N_LANES*EW-1:0]     x,       // input-vector elements, same layout
  output logic signed [AW-1:0]      result
);
  localparam int unsigned LEVELS = $clog2(N_LANES);
  localparam int unsigned NP     = 1 << LEVELS;          // lanes rounded up
  localparam int unsigned SW     = 2 * EW + LEVELS;      // width of the tree sum

  // tree[l][i]: node i of level l; level 0 holds the products
  logic signed [SW-1:0] tree [LEVELS+1][NP];

  always_comb begin
    for (int l = 0; l <= LEVELS; l++)
      for (int i = 0; i < NP; i++)
        tree[l][i] = '0;
    for (int i = 0; i < N_LANES; i++)
      tree[0][i] = SW'($signed(w[i*EW +: EW]) * $signed(x[i*EW +: EW]));
    for (int l = 1; l <= LEVELS; l++)
      for (int i = 0; i < (NP >> l); i++)
        tree[l][i] = tree[l-1][2*i] + tree[l-1][2*i+1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      result <= '0;
    else if (clear)  result <= '0;
    else if (mac_en) result <= result + AW'(tree[LEVELS][0]);
  end

endmodule
