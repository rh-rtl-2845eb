// One HBM3-PIM pseudo-channel under RH+ scheduling.
//
// Ties together the command scheduler (with its MAC address generator), the
// GEMV buffer and one PU per bank. WR_GB columns from the host stream are
// written into the GEMV buffer; every MAC_AB reads buffer column k (modulo
// its depth) and broadcasts it to all NB PUs, each of which multiplies it
// with the column its own bank returns for the MAC's address. MV_SB copies
// all PU results into the result register and pulses res_valid the next
// cycle; they stay there until the next MV_SB.
//
// The DRAM arrays themselves are outside: cmd carries ACT / MAC_AB / PRE with
// row and column to the banks, and col_data[b] must hold bank b's column of
// the open row in the cycle cmd.cmd is CMD_MAC (a zero-latency column read is
// this design's simplification; the paper gives no read latency).
// The pseudo-channel organisation (32 banks in 8 bank groups sharing one
// GEMV buffer) follows the HBM3-PIM architecture the paper builds on.
module rhp_pim_pch
  import pim_pkg::*;
#(
  parameter int unsigned NB          = 32,
  parameter int unsigned GB_ENTRIES  = 1024,
  parameter int unsigned N_RC        = 63,
  parameter int unsigned N_CCDAB_PC  = 6,
  parameter int unsigned N_CCDAB_NPC = 4,
  parameter int unsigned T_RCD       = 18,
  parameter int unsigned T_RP        = 39,
  parameter int unsigned T_WRGB      = 4,
  parameter int unsigned T_MVSB      = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  gemv_desc_t   desc,
  output logic         busy,
  output logic         done,
  input  logic         x_valid,
  output logic         x_ready,
  input  column_t      x_data,
  output dram_cmd_t    cmd,
  input  column_t      col_data [NB],
  output logic         res_valid,
  output acc_t         results [NB],
  output sched_stats_t stats
);
  localparam int unsigned GA = $clog2(GB_ENTRIES);

  logic              gb_we, pu_clear, mac_fire, mvsb_fire;
  logic [MACN_W-1:0] gb_waddr, gb_raddr;
  column_t           gb_rdata;
  acc_t              pu_res [NB];

  rhp_cmd_sched #(
    .N_RC(N_RC), .N_CCDAB_PC(N_CCDAB_PC), .N_CCDAB_NPC(N_CCDAB_NPC),
    .T_RCD(T_RCD), .T_RP(T_RP), .T_WRGB(T_WRGB), .T_MVSB(T_MVSB)
  ) u_sched (
    .clk, .rst_n, .start, .desc, .busy, .done,
    .x_valid, .x_ready, .cmd,
    .gb_we, .gb_waddr, .gb_raddr, .pu_clear, .mac_fire, .mvsb_fire, .stats
  );

  pim_global_buffer #(.ENTRIES(GB_ENTRIES), .W(COL_BITS)) u_gb (
    .clk,
    .we    (gb_we),
    .waddr (gb_waddr[GA-1:0]),
    .wdata (x_data),
    .raddr (gb_raddr[GA-1:0]),
    .rdata (gb_rdata)
  );

  for (genvar b = 0; b < NB; b++) begin : g_bank
    pim_pu u_pu (
      .clk, .rst_n,
      .clear  (pu_clear),
      .mac_en (mac_fire),
      .w      (col_data[b]),
      .x      (gb_rdata),
      .result (pu_res[b])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_valid <= 1'b0;
      for (int b = 0; b < NB; b++) results[b] <= '0;
    end else begin
      res_valid <= mvsb_fire;
      if (mvsb_fire) results <= pu_res;
    end
  end

  // Host stream rule: a column offered is held until it is taken.
  a_x_hold: assert property (@(posedge clk) disable iff (!rst_n)
    x_valid && !x_ready && busy |=> x_valid);

endmodule
