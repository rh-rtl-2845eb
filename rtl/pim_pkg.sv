// Shared types and constants of the RH+ HBM3-PIM design.
//
// The geometry follows the HBM3-PIM organisation: a DRAM row holds 32
// columns of 32 bytes (1024 B), a pseudo-channel has 32 banks (8 bank
// groups of 4), a stack has 32 pseudo-channels (16 channels x 2), so 1024
// banks and 1024 processing units. A column of 32 B carries 16 elements of
// 16 bits, which sets the number of PU lanes; the element format (signed
// 16-bit integers) and the row-address width are choices of this design.
//
// PIM commands seen by a pseudo-channel: ACT (open a row in all banks),
// MAC_AB (all-bank multiply-accumulate on one column), PRE (close the row),
// WR_GB (write one column of the input vector into the GEMV buffer) and
// MV_SB (move the PU results out).
package pim_pkg;

  localparam int unsigned COLS_PER_ROW = 32;   // columns per DRAM row
  localparam int unsigned COL_W        = $clog2(COLS_PER_ROW);
  localparam int unsigned COL_BITS     = 256;  // one column = 32 bytes
  localparam int unsigned ELEM_W       = 16;   // element width (assumed)
  localparam int unsigned LANES        = COL_BITS / ELEM_W;  // 16
  localparam int unsigned ROW_W        = 15;   // row address bits (assumed)
  localparam int unsigned MACN_W       = 16;   // width of a MAC count
  localparam int unsigned STRIDE_W     = 8;    // width of the stride field
  localparam int unsigned ACC_W        = 48;   // PU accumulator width (assumed)
  localparam int unsigned CNT_W        = 32;   // statistics counter width

  typedef logic [ROW_W-1:0]    row_t;
  typedef logic [COL_W-1:0]    col_t;
  typedef logic [COL_BITS-1:0] column_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  typedef enum logic [2:0] {
    CMD_NOP  = 3'd0,
    CMD_ACT  = 3'd1,
    CMD_MAC  = 3'd2,
    CMD_PRE  = 3'd3,
    CMD_WRGB = 3'd4,
    CMD_MVSB = 3'd5
  } pim_cmd_e;

  // Command and address a pseudo-channel drives towards its DRAM banks.
  typedef struct packed {
    pim_cmd_e cmd;
    row_t     row;   // valid with CMD_ACT and CMD_MAC
    col_t     col;   // valid with CMD_MAC
  } dram_cmd_t;

  // One GEMV pass as the host describes it.
  typedef struct packed {
    row_t                base_row;   // first weight row
    logic [MACN_W-1:0]   num_macs;   // MAC_AB commands in the pass
    logic [STRIDE_W-1:0] stride;     // column stride between MACs (RH+: 1)
    logic [MACN_W-1:0]   num_wrgb;   // input-vector columns to load first
    logic                clear_acc;  // clear PU results at the start
    logic                npc_mode;   // 1: non-power-constrained nCCDAB
  } gemv_desc_t;

  // Counters of one pass, kept per pseudo-channel.
  typedef struct packed {
    logic [CNT_W-1:0] cycles;   // start to done
    logic [CNT_W-1:0] mac_cycles; // first ACT to row closed (tRP after last PRE)
    logic [CNT_W-1:0] acts;
    logic [CNT_W-1:0] pres;
    logic [CNT_W-1:0] macs;
    logic [CNT_W-1:0] row_hits;   // MACs that needed no ACT
    logic [CNT_W-1:0] wrgbs;
    logic [CNT_W-1:0] mvsbs;
    logic [CNT_W-1:0] stalls;     // cycles a MAC was due but timing held it
  } sched_stats_t;

endpackage
